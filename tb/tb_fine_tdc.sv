// tb_fine_tdc: checks front detection and position in the SerDes word.
// Part 1 places a clean 0->1 step at every position k and expects
// fine = k. Part 2 drives random words and compares with a reference
// that scans a bit string of (previous newest sample, word MSB..LSB).
module tb_fine_tdc;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [7:0] word = '0;
  logic hit;
  logic [2:0] fine;
  int checks = 0, failures = 0;

  fine_tdc dut (.clk_wr(clk), .rst_n, .word, .hit, .fine);

  always #4 clk = ~clk;

  task automatic expect_out(input logic eh, input logic [2:0] ef, input string what);
    checks++;
    if (hit !== eh || (eh && fine !== ef)) begin
      failures++;
      $display("%s: hit=%b fine=%0d expected hit=%b fine=%0d", what, hit, fine, eh, ef);
    end
  endtask

  initial begin
    logic prev;
    logic eh;
    logic [2:0] ef;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // part 1: steps
    for (int k = 0; k < 8; k++) begin
      word = 8'h00; @(negedge clk);
      word = 8'h00; @(negedge clk);
      expect_out(1'b0, 3'd0, "low word");
      word = 8'hFF >> k; @(negedge clk);
      expect_out(1'b1, 3'(k), "step");
      word = 8'hFF; @(negedge clk);
      expect_out(1'b0, 3'd0, "steady high");
    end
    // part 2: random words
    prev = word[0];
    for (int n = 0; n < 2000; n++) begin
      logic [7:0] w;
      string bits;
      w = 8'($urandom);
      word = w;
      // reference: character string, earliest sample first
      bits = (prev ? "1" : "0");
      for (int b = 7; b >= 0; b--) bits = {bits, (w[b] ? "1" : "0")};
      eh = 1'b0; ef = '0;
      for (int i = 1; i <= 8; i++)
        if (!eh && bits[i-1] == "0" && bits[i] == "1") begin eh = 1'b1; ef = 3'(i - 1); end
      @(negedge clk);
      expect_out(eh, ef, "random");
      prev = w[0];
    end
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
