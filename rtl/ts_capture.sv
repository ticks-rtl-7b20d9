// ts_capture: assembles a full time-stamp when the fine TDC sees a front.
//
// On the fine-TDC flag the fine position, the coarse-TDC count, the WR
// TAI seconds and the PPS counter are latched together (the paper's
// "read-out of the coarse-TDC counter together with the TAI seconds").
// The event counter counts the same trigger through its own synchronizer
// a few cycles later, so the capture waits up to CNT_WAIT cycles for the
// counter's increment and stores the value it takes, so that the record
// carries this trigger's event number; if no increment comes (a pulse too
// short to count) the current count is stored. The finished time-stamp is
// handed to the clock-crossing stage with a one-cycle `ts_load`, the
// paper's "data ready" flag. While the crossing stage is busy (the event
// is still awaiting its SPI word or the 400 ns minimum spacing) fronts are
// ignored and reported on `dropped`; the event counter still counts them.
// Waiting for the counter is this design's choice.
//
// Interface: clk_wr domain. hit/fine from fine_tdc; coarse, tai, pps_cnt;
// evt_inc/evt_count/evt_count_next from event_counter; busy from ts_cdc.
module ts_capture
  import ticks_pkg::*;
#(
  parameter int unsigned CNT_WAIT = 6
) (
  input  logic                clk_wr,
  input  logic                rst_n,
  input  logic                hit,
  input  logic [FINE_W-1:0]   fine,
  input  logic [COARSE_W-1:0] coarse,
  input  logic [TAI_W-1:0]    tai,
  input  logic [CNT_W-1:0]    pps_cnt,
  input  logic                evt_inc,
  input  logic [CNT_W-1:0]    evt_count,
  input  logic [CNT_W-1:0]    evt_count_next,
  input  logic                busy,
  output ts_t                 ts,
  output logic                ts_load,
  output logic                dropped
);

  typedef enum logic {IDLE, WAIT_CNT} state_e;

  state_e                        state;
  logic [$clog2(CNT_WAIT+1)-1:0] wait_q;

  always_ff @(posedge clk_wr or negedge rst_n)
    if (!rst_n) begin
      state   <= IDLE;
      wait_q  <= '0;
      ts      <= '0;
      ts_load <= 1'b0;
      dropped <= 1'b0;
    end else begin
      ts_load <= 1'b0;
      dropped <= 1'b0;
      unique case (state)
        IDLE: if (hit) begin
          if (busy) dropped <= 1'b1;
          else begin
            ts.fine    <= fine;
            ts.coarse  <= coarse;
            ts.tai     <= tai;
            ts.pps_cnt <= pps_cnt;
            wait_q     <= '0;
            if (evt_inc) begin
              ts.evt_cnt <= evt_count_next;
              ts_load    <= 1'b1;
            end else begin
              state <= WAIT_CNT;
            end
          end
        end
        WAIT_CNT: begin
          if (hit) dropped <= 1'b1;
          if (evt_inc) begin
            ts.evt_cnt <= evt_count_next;
            ts_load    <= 1'b1;
            state      <= IDLE;
          end else if (wait_q == ($clog2(CNT_WAIT+1))'(CNT_WAIT - 1)) begin
            ts.evt_cnt <= evt_count;
            ts_load    <= 1'b1;
            state      <= IDLE;
          end else begin
            wait_q <= wait_q + 1'b1;
          end
        end
        default: state <= IDLE;
      endcase
    end

endmodule
