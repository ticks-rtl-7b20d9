// event_counter: counts trigger pulses, independently of the TDC.
//
// The trigger goes through a two-flop synchronizer into the WR-clock
// domain. A pulse is counted once, in the cycle where it has been high
// for MIN_HIGH consecutive samples; with 8 ns sampling and MIN_HIGH = 2,
// every pulse longer than 20 ns is counted (the paper's requirement),
// shorter glitches may not be. The count includes triggers for which no
// time-stamp could be formed (dead time, full buffer). While `clear` is
// high the counter is held at zero (the "reset" state of the counter
// state machine). `inc` pulses with the count and `count_next` gives the
// value the counter takes on that edge. The filter length is this
// design's choice.
//
// Interface: clk_wr, rst_n, trig (asynchronous), clear, inc, count,
// count_next. Latency: inc comes 2 + MIN_HIGH cycles after the rising edge.
module event_counter #(
  parameter int unsigned MIN_HIGH = 2,
  parameter int unsigned CNT_W    = 32
) (
  input  logic             clk_wr,
  input  logic             rst_n,
  input  logic             trig,
  input  logic             clear,
  output logic             inc,
  output logic [CNT_W-1:0] count,
  output logic [CNT_W-1:0] count_next
);

  localparam int unsigned RUN_W = $clog2(MIN_HIGH + 1);

  logic [1:0]       sync_q;
  logic [RUN_W-1:0] run_q;     // consecutive high samples, saturating

  assign inc        = sync_q[1] && (run_q == RUN_W'(MIN_HIGH - 1)) && !clear;
  assign count_next = count + 1'b1;

  always_ff @(posedge clk_wr or negedge rst_n)
    if (!rst_n) begin
      sync_q <= '0;
      run_q  <= '0;
      count  <= '0;
    end else begin
      sync_q <= {sync_q[0], trig};
      if (!sync_q[1])                     run_q <= '0;
      else if (run_q != RUN_W'(MIN_HIGH)) run_q <= run_q + 1'b1;
      if (clear)    count <= '0;
      else if (inc) count <= count_next;
    end

endmodule
