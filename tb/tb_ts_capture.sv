// tb_ts_capture: the time-stamp is latched on the fine-TDC flag, gets the
// event number produced by the counter's increment a few cycles later (or
// the current count if none comes within the wait), is loaded once, and a
// flag while busy is dropped.
module tb_ts_capture;
  import ticks_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic hit = 1'b0, evt_inc = 1'b0, busy = 1'b0;
  logic [2:0] fine = '0;
  logic [26:0] coarse = '0;
  logic [39:0] tai = 40'h12_3456_789A;
  logic [31:0] pps_cnt = 32'd7, evt_count = 32'd100;
  logic [31:0] evt_count_next;
  ts_t ts;
  logic ts_load, dropped;
  int checks = 0, failures = 0;

  assign evt_count_next = evt_count + 1;

  ts_capture dut (.clk_wr(clk), .rst_n, .hit, .fine, .coarse, .tai, .pps_cnt,
    .evt_inc, .evt_count, .evt_count_next, .busy, .ts, .ts_load, .dropped);

  always #4 clk = ~clk;
  always @(posedge clk) coarse <= coarse + 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // one trigger: flag at fine f, counter increment `d` cycles later
  // (d < 0: never); returns after the load
  task automatic one(input int f, input int d);
    logic [26:0] c0;
    logic [31:0] exp_cnt;
    int loads;
    @(negedge clk);
    hit = 1'b1; fine = 3'(f); c0 = coarse;
    evt_inc = (d == 0);
    exp_cnt = (d >= 0 && d <= 6) ? evt_count + 1 : evt_count;
    @(negedge clk);
    hit = 1'b0; evt_inc = 1'b0;
    if (d == 0) evt_count++;
    loads = 0;
    for (int k = 1; k < 10; k++) begin
      if (ts_load) loads++;
      if (ts_load) begin
        check(ts.fine == 3'(f), "fine");
        check(ts.coarse == c0, "coarse");
        check(ts.tai == tai, "tai");
        check(ts.pps_cnt == pps_cnt, "pps");
        check(ts.evt_cnt == exp_cnt, $sformatf("event count got %0d exp %0d (d=%0d)", ts.evt_cnt, exp_cnt, d));
      end
      evt_inc = (k == d);
      @(negedge clk);
      if (k == d) evt_count++;
      evt_inc = 1'b0;
    end
    if (ts_load) loads++;
    check(loads == 1, $sformatf("one load (got %0d)", loads));
  endtask

  initial begin
    int drops;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 40; n++) one($urandom_range(0, 7), n % 8 - 1);
    // busy: flag dropped, no load
    @(negedge clk);
    busy = 1'b1; hit = 1'b1;
    @(negedge clk);
    hit = 1'b0;
    check(dropped == 1'b1, "dropped while busy");
    drops = 0;
    repeat (8) begin @(negedge clk); if (ts_load) drops++; end
    check(drops == 0, "no load while busy");
    busy = 1'b0;
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
