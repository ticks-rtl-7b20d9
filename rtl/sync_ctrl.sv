// sync_ctrl: counter state machine that lines the board's counters up
// with the camera's.
//
// States: RUNNING (counters count), RESET (entered on the "reset"
// command from any state: event and PPS counters are held at zero) and
// GET_READY (entered on "get-ready" while in RESET: still held). In
// GET_READY the next WR PPS pulse fires `sync_trig`, which the external
// trigger output sends to the camera, and returns to RUNNING; both sides
// then count from zero. The PPS counter counts WR PPS pulses while
// RUNNING. States and transitions follow the paper; ignoring "get-ready"
// outside RESET and not counting the releasing PPS are this design's
// choices.
//
// Interface (clk_wr): pps, cmd_reset, cmd_getready (one-cycle pulses);
// cnt_clear, pps_count, sync_trig, state.
module sync_ctrl #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk_wr,
  input  logic             rst_n,
  input  logic             pps,
  input  logic             cmd_reset,
  input  logic             cmd_getready,
  output logic             cnt_clear,
  output logic [CNT_W-1:0] pps_count,
  output logic             sync_trig,
  output logic [1:0]       state_o
);

  typedef enum logic [1:0] {RUNNING = 2'd0, RESET = 2'd1, GET_READY = 2'd2} state_e;

  state_e state;

  assign cnt_clear = (state != RUNNING);
  assign sync_trig = (state == GET_READY) && pps && !cmd_reset;
  assign state_o   = state;

  always_ff @(posedge clk_wr or negedge rst_n)
    if (!rst_n) begin
      state     <= RUNNING;
      pps_count <= '0;
    end else begin
      if (cmd_reset) state <= RESET;
      else begin
        unique case (state)
          RUNNING:   ;
          RESET:     if (cmd_getready) state <= GET_READY;
          GET_READY: if (pps) state <= RUNNING;
          default:   state <= RUNNING;
        endcase
      end
      if (cnt_clear) pps_count <= '0;
      else if (pps)  pps_count <= pps_count + 1'b1;
    end

endmodule
