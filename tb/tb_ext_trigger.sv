// tb_ext_trigger: a target TAI second and coarse tick are loaded; the
// output must rise exactly one WR cycle after that tick (the registered
// output), last 4 cycles, fire once, and not fire in other seconds with
// the same tick. A sync request fires it too.
module tb_ext_trigger;
  logic clk = 1'b0, rst_n = 1'b0, arm = 1'b0, sync_trig = 1'b0;
  logic [39:0] tai = 40'd1000, tgt_tai = '0;
  logic [26:0] coarse = '0, tgt_coarse = '0;
  logic ext_trig, armed;
  int checks = 0, failures = 0;
  int t = 0, rise_t = -1, nrise = 0, hi = 0;
  logic prev = 1'b0;
  localparam int SEC = 500;   // ticks per "second" in this test

  ext_trigger dut (.clk_wr(clk), .rst_n, .tai, .coarse, .arm, .tgt_tai, .tgt_coarse,
    .sync_trig, .ext_trig, .armed);

  always #4 clk = ~clk;
  // WR time model
  always @(posedge clk) if (rst_n) begin
    if (coarse == 27'(SEC - 1)) begin coarse <= '0; tai <= tai + 1; end
    else coarse <= coarse + 1;
    t <= t + 1;
    if (ext_trig && !prev) begin rise_t = t; nrise++; end
    if (ext_trig) hi++;
    prev <= ext_trig;
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int target_t;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    tgt_tai = tai + 2; tgt_coarse = 27'd123;
    // absolute cycle of the target tick
    target_t = t + (SEC - int'(coarse)) + SEC + 123;
    arm = 1'b1; @(negedge clk); arm = 1'b0;
    check(armed, "armed");
    repeat (4 * SEC) @(negedge clk);
    check(nrise == 1, $sformatf("one pulse (%0d)", nrise));
    check(rise_t == target_t + 1, $sformatf("rise at %0d, target tick %0d", rise_t, target_t));
    check(hi == 4, "pulse width 4 cycles");
    check(!armed, "disarmed");
    @(negedge clk); sync_trig = 1'b1; @(negedge clk); sync_trig = 1'b0;
    repeat (6) @(negedge clk);
    check(nrise == 2 && hi == 8, "sync request fires");
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
