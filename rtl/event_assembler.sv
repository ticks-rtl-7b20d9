// event_assembler: completes one channel's event with its SPI word.
//
// When a time-stamp arrives from the WR-clock domain, a timer of
// TIMEOUT_CYC system cycles (25 x 16 ns = 400 ns) starts. An SPI word
// arriving during that time is attached to the event and the event is
// offered for writing at once; if none arrives, the event is offered at
// the time-out with its SPI-valid bit clear. The time-stamp is released
// (which re-enables the channel's TDC) only when the event has been
// accepted and the time-out has passed, so 400 ns is also the minimum
// spacing of time-stamped triggers; with the capture and the two clock
// crossings added, a channel is dead for 0.50-0.55 us after a trigger.
// The time-stamp fields pass straight from `ts` to `ev` (ts_cdc holds
// them stable until ts_done). The wait, the 400 ns time-out and
// re-enabling triggers after it follow the paper; re-enabling only after
// the full time-out even when the SPI word came early is this design's
// reading of the paper's "minimum time between events".
//
// Interface (clk_sys): ts_valid/ts/ts_done to ts_cdc; spi_valid/spi_data
// from spi_rx; ev_valid/ev/ev_ready to the bunch builder.
module event_assembler
  import ticks_pkg::*;
#(
  parameter int unsigned TIMEOUT_CYC = 25,
  parameter bit          CH          = 1'b0
) (
  input  logic             clk_sys,
  input  logic             rst_n,
  input  logic             ts_valid,
  input  ts_t              ts,
  output logic             ts_done,
  input  logic             spi_valid,
  input  logic [SPI_W-1:0] spi_data,
  output logic             ev_valid,
  output event_t           ev,
  input  logic             ev_ready
);

  localparam int unsigned T_W = $clog2(TIMEOUT_CYC + 1);

  typedef enum logic [1:0] {IDLE, WAIT, HOLD} state_e;

  state_e           state;
  logic [T_W-1:0]   timer;
  logic             timed_out;
  logic             have_spi;
  logic [SPI_W-1:0] spi_q;
  logic             written;

  assign timed_out = (timer == T_W'(TIMEOUT_CYC - 1));
  assign ev_valid  = (state == WAIT) && !written && (have_spi || timed_out);
  assign ts_done   = (state == HOLD);
  always_comb begin
    ev           = '0;
    ev.ch        = CH;
    ev.spi_valid = have_spi;
    ev.spi       = spi_q;
    ev.ts        = ts;
  end

  always_ff @(posedge clk_sys or negedge rst_n)
    if (!rst_n) begin
      state    <= IDLE;
      timer    <= '0;
      have_spi <= 1'b0;
      spi_q    <= '0;
      written  <= 1'b0;
    end else begin
      unique case (state)
        IDLE: if (ts_valid) begin
          state    <= WAIT;
          timer    <= '0;
          have_spi <= 1'b0;
          spi_q    <= '0;
          written  <= 1'b0;
        end
        WAIT: begin
          if (!timed_out) timer <= timer + 1'b1;
          if (spi_valid && !have_spi && !written) begin
            have_spi <= 1'b1;
            spi_q    <= spi_data;
          end
          if (ev_valid && ev_ready) written <= 1'b1;
          if ((written || (ev_valid && ev_ready)) && timed_out) state <= HOLD;
        end
        HOLD: state <= IDLE;   // ts_done pulses here
        default: state <= IDLE;
      endcase
    end

endmodule
