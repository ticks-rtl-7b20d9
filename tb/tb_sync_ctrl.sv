// tb_sync_ctrl: the reset / get-ready sequence. PPS pulses are counted
// while running; "reset" holds the counter at zero across PPS pulses;
// "get-ready" alone does nothing until the next PPS, which fires the
// external-trigger request once and restarts counting from zero; a
// get-ready while running is ignored.
module tb_sync_ctrl;
  logic clk = 1'b0, rst_n = 1'b0, pps = 1'b0, cmd_reset = 1'b0, cmd_getready = 1'b0;
  logic cnt_clear, sync_trig;
  logic [31:0] pps_count;
  logic [1:0] state;
  int checks = 0, failures = 0, n_trig = 0;

  sync_ctrl dut (.clk_wr(clk), .rst_n, .pps, .cmd_reset, .cmd_getready, .cnt_clear,
    .pps_count, .sync_trig, .state_o(state));

  always #4 clk = ~clk;
  always @(posedge clk) if (sync_trig) n_trig++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (count=%0d state=%0d)", what, pps_count, state); end
  endtask

  task automatic pulse_pps(); @(negedge clk); pps = 1'b1; @(negedge clk); pps = 1'b0; repeat (3) @(negedge clk); endtask
  task automatic do_reset(); @(negedge clk); cmd_reset = 1'b1; @(negedge clk); cmd_reset = 1'b0; endtask
  task automatic do_ready(); @(negedge clk); cmd_getready = 1'b1; @(negedge clk); cmd_getready = 1'b0; endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) pulse_pps();
    check(pps_count == 3 && !cnt_clear, "counting while running");
    do_ready();
    pulse_pps();
    check(n_trig == 0 && pps_count == 4, "get-ready ignored while running");
    do_reset();
    @(negedge clk);
    check(cnt_clear && pps_count == 0, "reset clears and holds");
    repeat (2) pulse_pps();
    check(pps_count == 0 && n_trig == 0, "held across PPS");
    do_ready();
    repeat (5) @(negedge clk);
    check(cnt_clear && n_trig == 0, "get-ready waits for PPS");
    pulse_pps();
    check(n_trig == 1 && !cnt_clear && pps_count == 0, "PPS fires trigger and releases at zero");
    repeat (2) pulse_pps();
    check(pps_count == 2 && n_trig == 1, "counting again from zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
