// tb_sync_fifo: random pushes and pops against a queue model for the
// 96-bit x 40-word event FIFO, including full and empty.
module tb_sync_fifo;
  logic clk = 1'b0, rst_n = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [95:0] din = '0, dout;
  logic empty, full;
  logic [5:0] count;
  logic [95:0] q [$];
  int checks = 0, failures = 0, nfull = 0;

  sync_fifo dut (.clk, .rst_n, .wr_en, .din, .rd_en, .dout, .empty, .full, .count);

  always #5 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      int bias;
      bias = ((n / 500) % 2 == 0) ? 70 : 30;   // alternate fill and drain phases
      wr_en = ($urandom_range(0, 99) < bias);
      rd_en = ($urandom_range(0, 99) < 100 - bias);
      din = {$urandom, $urandom, $urandom};
      checks++;
      if (count !== 6'(q.size()) || empty !== (q.size() == 0) || full !== (q.size() == 40) ||
          (q.size() != 0 && dout !== q[0])) begin
        failures++;
        if (failures < 5) $display("n=%0d count=%0d model=%0d", n, count, q.size());
      end
      if (full) nfull++;
      @(negedge clk);
    end
    checks++;
    if (nfull == 0) begin failures++; $display("never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // model: both decided on the state before the edge
  always @(posedge clk) if (rst_n) begin
    automatic bit do_rd = rd_en && q.size() != 0;
    automatic bit do_wr = wr_en && q.size() != 40;
    if (do_rd) void'(q.pop_front());
    if (do_wr) q.push_back(din);
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
