// tb_ts_cdc: words cross from a 125 MHz to a 62.5 MHz clock. Each word
// must appear intact once on the destination, the source must report
// busy until the destination releases it, and loads while busy must be
// ignored.
`timescale 1ns/1ps
module tb_ts_cdc;
  logic clk_s = 1'b0, clk_d = 1'b0, rst_n = 1'b0;
  logic src_load = 1'b0, src_busy, dst_valid, dst_done = 1'b0;
  logic [31:0] src_data = '0, dst_data;
  int checks = 0, failures = 0;
  logic [31:0] sent [$];

  ts_cdc #(.W(32)) dut (.clk_src(clk_s), .rst_src_n(rst_n), .src_load, .src_data,
    .src_busy, .clk_dst(clk_d), .rst_dst_n(rst_n), .dst_valid, .dst_data, .dst_done);

  always #4 clk_s = ~clk_s;
  always #8.3 clk_d = ~clk_d;

  // source: load words whenever allowed, sometimes also while busy
  initial begin
    #40 rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      @(negedge clk_s);
      src_data = $urandom;
      src_load = 1'b1;
      if (!src_busy) sent.push_back(src_data);
      @(negedge clk_s);
      src_load = 1'b0;
      checks++;
      if (!src_busy) begin failures++; $display("busy not raised"); end
      // a load while busy must be ignored
      src_data = $urandom; src_load = 1'b1;
      @(negedge clk_s);
      src_load = 1'b0;
      repeat ($urandom_range(0, 20)) @(negedge clk_s);
      wait (!src_busy);
    end
  end

  // destination: take each word after a random delay
  initial begin
    int got = 0;
    #40;
    while (got < 200) begin
      @(negedge clk_d);
      if (dst_valid) begin
        repeat ($urandom_range(0, 5)) @(negedge clk_d);
        checks++;
        if (sent.size() == 0 || dst_data !== sent[0]) begin
          failures++; $display("word %0d wrong", got);
        end
        if (sent.size() != 0) void'(sent.pop_front());
        dst_done = 1'b1;
        @(negedge clk_d);
        dst_done = 1'b0;
        checks++;
        if (dst_valid) begin failures++; $display("valid not lowered"); end
        got++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
