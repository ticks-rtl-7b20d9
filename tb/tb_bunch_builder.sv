// tb_bunch_builder: bunch closure and ping-pong switching.
// (a) 20 events close a bunch at once; (b) 5 events close at the time-out
// (shortened to 300 cycles); (c) both channels writing together, read-out
// first; (d) with the sender stalled, the second FIFO fills to 40 and 5
// further events are lost, then the 40-event bunch is sent; (e) a
// time-out with no events sends nothing. Every record read out is
// compared with the events written, and every tailer with the last one.
module tb_bunch_builder;
  import ticks_pkg::*;
  localparam int TMO = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ev0_valid = 1'b0, ev1_valid = 1'b0, ev0_ready, ev1_ready;
  event_t ev0 = '0, ev1 = '0;
  logic bunch_valid, rd_en = 1'b0, bunch_done = 1'b0;
  logic [NEV_W-1:0] bunch_nev;
  logic [TAILER_W-1:0] bunch_tailer;
  logic [REC_W-1:0] rd_data;
  logic lost, close_full, close_timeout;
  int checks = 0, failures = 0;
  int n_lost = 0, n_full = 0, n_tmo = 0, n_bunch = 0;
  event_t exp_q [$];
  logic sender_en = 1'b1;
  int last_nev;

  bunch_builder #(.BUNCH_TIMEOUT(TMO)) dut (.clk_sys(clk), .rst_n, .ev0_valid, .ev0,
    .ev0_ready, .ev1_valid, .ev1, .ev1_ready, .bunch_valid, .bunch_nev, .bunch_tailer,
    .rd_en, .rd_data, .bunch_done, .lost, .close_full, .close_timeout);

  always #8 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic event_t rnd_ev(input logic ch);
    event_t e;
    e = event_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
    e.ch = ch;
    return e;
  endfunction

  // model of accepted events; an event reported lost is removed
  always @(posedge clk) if (rst_n) begin
    if (ev0_valid && ev0_ready && !lost) exp_q.push_back(ev0);
    else if (ev1_valid && ev1_ready && !lost) exp_q.push_back(ev1);
    if (lost) n_lost++;
    if (close_full) n_full++;
    if (close_timeout) n_tmo++;
  end

  task automatic push(input logic ch);
    @(negedge clk);
    if (ch == 1'b0) begin ev0 = rnd_ev(1'b0); ev0_valid = 1'b1; end
    else            begin ev1 = rnd_ev(1'b1); ev1_valid = 1'b1; end
    #1;
    while (!(ch ? ev1_ready : ev0_ready)) begin @(negedge clk); #1; end
    @(negedge clk);
    ev0_valid = 1'b0; ev1_valid = 1'b0;
  endtask

  // sender: reads each closed bunch and compares it
  initial begin
    event_t e;
    forever begin
      @(negedge clk);
      if (bunch_valid && sender_en) begin
        last_nev = bunch_nev;
        n_bunch++;
        for (int i = 0; i < last_nev; i++) begin
          e = exp_q.pop_front();
          check(rd_data == pack_record(e), $sformatf("record %0d of bunch %0d", i, n_bunch));
          check(rd_data[95] == e.ch && rd_data[2:0] == e.ts.fine && rd_data[93:78] == e.spi, "record fields");
          rd_en = 1'b1; @(negedge clk); rd_en = 1'b0;
        end
        check(bunch_tailer[159:120] == e.ts.tai && bunch_tailer[119:93] == e.ts.coarse &&
              bunch_tailer[82:51] == e.ts.evt_cnt && bunch_tailer[50:19] == e.ts.pps_cnt &&
              bunch_tailer[88:83] == 6'(last_nev), "tailer");
        bunch_done = 1'b1; @(negedge clk); bunch_done = 1'b0;
      end
    end
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // (a)
    for (int i = 0; i < 20; i++) push(1'b0);
    repeat (3) @(negedge clk);
    check(n_full == 1 && n_bunch == 1 && last_nev == 20, "(a) full bunch of 20");
    // (b)
    repeat (TMO) @(negedge clk);
    n_tmo = 0;
    for (int i = 0; i < 5; i++) push(i % 2);
    t0 = 0;
    while (n_tmo == 0 && t0 < 2 * TMO) begin @(negedge clk); t0++; end
    repeat (3) @(negedge clk);
    check(n_tmo == 1 && last_nev == 5, "(b) time-out bunch of 5");
    // (c)
    @(negedge clk);
    ev0 = rnd_ev(1'b0); ev1 = rnd_ev(1'b1); ev0_valid = 1'b1; ev1_valid = 1'b1;
    @(negedge clk); ev0_valid = 1'b0;
    @(negedge clk); ev1_valid = 1'b0;
    for (int i = 0; i < 18; i++) push(1'b1);
    repeat (100) @(negedge clk);
    check(last_nev == 20 && exp_q.size() == 0, $sformatf("(c) both channels nev=%0d left=%0d", last_nev, exp_q.size()));
    // (d)
    sender_en = 1'b0;
    for (int i = 0; i < 65; i++) push($urandom_range(0, 1));
    check(n_lost == 5, $sformatf("(d) lost %0d", n_lost));
    sender_en = 1'b1;
    repeat (300) @(negedge clk);
    check(exp_q.size() == 0 && last_nev == 40, "(d) overflow bunches sent");
    // (e)
    t0 = n_bunch;
    repeat (3 * TMO) @(negedge clk);
    check(n_bunch == t0, "(e) empty time-out sends nothing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
