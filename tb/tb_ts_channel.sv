// tb_ts_channel: one complete time-stamping channel. Triggers arrive at
// random times with a 1 ns grid (plus a fixed sub-ns phase); the
// difference between two successive time-stamps (coarse x 8 + fine) must
// equal the difference of their injection times exactly, to the
// nanosecond. Each time-stamp carries its trigger's event number; a
// trigger inside the dead time is counted but not time-stamped, and a
// counter clear holds the count at zero.
`timescale 1ns/1ps
module tb_ts_channel;
  import ticks_pkg::*;
  logic clk_fast, clk_wr, clk_sys, rst_n = 1'b0, trig = 1'b0, cnt_clear = 1'b0;
  logic [26:0] coarse = 27'd1000;
  logic [39:0] tai = 40'd77;
  logic [31:0] pps_cnt = 32'd5, evt_count;
  logic dropped, ts_valid, ts_done = 1'b0;
  ts_t ts;
  int checks = 0, failures = 0, n_drop = 0;
  longint inj [$];
  int exp_evt [$];
  int n_ts = 0;
  longint prev_inj = -1, prev_ts = -1;

  ts_channel dut (.clk_fast, .clk_wr, .clk_sys, .rst_n, .trig, .coarse, .tai, .pps_cnt,
    .cnt_clear, .evt_count, .dropped, .ts_valid, .ts, .ts_done);

  initial forever begin clk_fast = 1'b1; #0.5; clk_fast = 1'b0; #0.5; end
  initial forever begin clk_wr = 1'b1; #4; clk_wr = 1'b0; #4; end
  initial forever begin clk_sys = 1'b1; #8; clk_sys = 1'b0; #8; end
  always @(posedge clk_wr) coarse <= coarse + 1;
  always @(posedge clk_wr) if (dropped) n_drop++;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // system side: take each time-stamp, release it 30 cycles later
  initial begin
    longint tsn, d_inj, d_ts;
    wait (rst_n);
    forever begin
      @(negedge clk_sys);
      if (ts_valid) begin
        tsn = longint'(ts.coarse) * 8 + longint'(ts.fine);
        check(ts.tai == tai && ts.pps_cnt == pps_cnt, "tai / pps");
        if (inj.size() != 0) begin
          check(int'(ts.evt_cnt) == exp_evt[0], $sformatf("event number %0d exp %0d", ts.evt_cnt, exp_evt[0]));
          if (prev_ts >= 0) begin
            d_inj = inj[0] - prev_inj;
            d_ts  = tsn - prev_ts;
            check(d_inj == d_ts, $sformatf("interval %0d ns, time-stamps give %0d", d_inj, d_ts));
          end
          prev_inj = inj[0]; prev_ts = tsn;
          void'(inj.pop_front()); void'(exp_evt.pop_front());
        end else check(1'b0, "unexpected time-stamp");
        n_ts++;
        repeat (30) @(negedge clk_sys);
        ts_done = 1'b1; @(negedge clk_sys); ts_done = 1'b0;
      end
    end
  end

  initial begin
    longint t;
    int nev;
    #40 rst_n = 1'b1;
    #1000;
    nev = 0;
    for (int i = 0; i < 60; i++) begin
      // wait to a random integer ns, then 0.3 ns after it
      #($urandom_range(900, 1500));
      t = longint'($ceil($realtime));
      #(real'(t) - $realtime + 0.3);
      trig = 1'b1; inj.push_back(t); nev++; exp_evt.push_back(nev);
      #50 trig = 1'b0;
      if (i % 10 == 9) begin       // second trigger inside the dead time
        #100 trig = 1'b1; nev++; #40 trig = 1'b0;
      end
    end
    #2000;
    check(inj.size() == 0 && n_ts == 60, $sformatf("%0d time-stamps", n_ts));
    check(evt_count == 32'(nev) && nev == 66, "all triggers counted");
    check(n_drop == 6, $sformatf("%0d dropped", n_drop));
    cnt_clear = 1'b1; #100;
    prev_ts = -1;                  // still time-stamped, event number 0
    inj.push_back(longint'($realtime)); exp_evt.push_back(0);
    trig = 1'b1; #50 trig = 1'b0; #100;
    check(evt_count == 0, "clear holds zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
