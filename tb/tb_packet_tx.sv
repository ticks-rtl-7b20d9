// tb_packet_tx: a closed bunch of N records (N = 20, 1, 7, then 40) is
// streamed as 6 words per record and 10 tailer words, most significant
// first, with the last word flagged and the payload length 12N + 20
// bytes. With the UDP side always ready the packet takes exactly 6N + 10
// cycles (six cycles per event); with random back-pressure the data must
// be unchanged.
module tb_packet_tx;
  import ticks_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic bunch_valid = 1'b0, rd_en, bunch_done, tx_valid, tx_ready = 1'b1, tx_last;
  logic [NEV_W-1:0] bunch_nev = '0;
  logic [TAILER_W-1:0] bunch_tailer = '0;
  logic [REC_W-1:0] rd_data;
  logic [15:0] tx_data, tx_len;
  logic [REC_W-1:0] recs [$];
  int checks = 0, failures = 0;
  logic rand_ready = 1'b0;

  packet_tx dut (.clk_sys(clk), .rst_n, .bunch_valid, .bunch_nev, .bunch_tailer,
    .rd_data, .rd_en, .bunch_done, .tx_valid, .tx_ready, .tx_data, .tx_last, .tx_len);

  always #8 clk = ~clk;

  // FIFO model: head visible, pop on rd_en
  assign rd_data = (recs.size() != 0) ? recs[0] : '0;
  always @(posedge clk) if (rd_en && recs.size() != 0) void'(recs.pop_front());
  always @(negedge clk) tx_ready = rand_ready ? 1'($urandom_range(0, 1)) : 1'b1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic one(input int n);
    logic [15:0] words [$];
    logic [REC_W-1:0] r;
    int cycles, idx, nlast;
    for (int i = 0; i < n; i++) begin
      r = {$urandom, $urandom, $urandom};
      recs.push_back(r);
      for (int w = 0; w < 6; w++) words.push_back(r[95 - 16*w -: 16]);
    end
    bunch_tailer = {$urandom, $urandom, $urandom, $urandom, $urandom};
    for (int w = 0; w < 10; w++) words.push_back(bunch_tailer[159 - 16*w -: 16]);
    @(negedge clk);
    bunch_nev = 6'(n); bunch_valid = 1'b1;
    cycles = 0; idx = 0; nlast = 0;
    while (!bunch_done && cycles < 1000) begin
      @(posedge clk);
      if (tx_valid && tx_ready) begin
        check(tx_data == words[idx], $sformatf("word %0d", idx));
        check(tx_last == (idx == 6 * n + 9), "last flag");
        check(tx_len == 16'(12 * n + 20), "length");
        idx++;
      end
      cycles++;
      @(negedge clk);
    end
    bunch_valid = 1'b0;
    check(idx == 6 * n + 10, $sformatf("word count %0d", idx));
    check(recs.size() == 0, "all records popped");
    if (!rand_ready) check(cycles == 6 * n + 10 + 1, $sformatf("cycles %0d for %0d events", cycles, n));
    @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(20);
    one(1);
    one(7);
    one(40);
    rand_ready = 1'b1;
    one(20);
    one(3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
