// tb_spi_rx: a 50 MHz SPI master (mode 0, MSB first) sends 16-bit words;
// each must appear once on the 62.5 MHz side. A word cut short by CS_N
// going high must be discarded. Also checks the 16-bit word takes about
// 320 ns to arrive at 50 MHz, as the paper states.
`timescale 1ns/1ps
module tb_spi_rx;
  logic clk_sys = 1'b0, rst_n = 1'b1;
  logic sck = 1'b0, cs_n = 1'b0, mosi = 1'b0;
  logic valid;
  logic [15:0] data;
  int checks = 0, failures = 0;
  int got = 0;
  logic [15:0] q [$];

  spi_rx dut (.rst_n, .sck, .cs_n, .mosi, .clk_sys, .valid, .data);

  always #8 clk_sys = ~clk_sys;

  task automatic send(input logic [15:0] w, input int nbits);
    cs_n = 1'b0;
    for (int b = 15; b > 15 - nbits; b--) begin
      mosi = w[b]; #10; sck = 1'b1; #10; sck = 1'b0;
    end
    #5 cs_n = 1'b1; #20;
  endtask

  always @(negedge clk_sys) if (valid && $realtime > 10) begin
    checks++;
    if (q.size() == 0 || data !== q[0]) begin
      failures++; $display("word %0d: got %h exp %h", got, data, q.size() ? q[0] : 16'h0);
    end
    if (q.size() != 0) void'(q.pop_front());
    got++;
  end

  initial begin
    realtime t0, t1;
    logic [15:0] w;
    #1 rst_n = 1'b0;   // falling edge applies the asynchronous reset
    #1 cs_n = 1'b1;    // rising edge clears the bit counter
    #50 rst_n = 1'b1;
    #30;
    // timing of one word
    w = 16'hA5C3; q.push_back(w);
    t0 = $realtime; send(w, 16); t1 = $realtime;
    checks++;
    if (t1 - t0 < 320.0 || t1 - t0 > 350.0) begin failures++; $display("word time %0t", t1 - t0); end
    for (int n = 0; n < 100; n++) begin
      w = 16'($urandom);
      if (n % 10 == 5) send(w, 9);             // aborted word
      else begin q.push_back(w); send(w, 16); end
      #($urandom_range(0, 100));
    end
    #200;
    checks++;
    if (got != 91 || q.size() != 0) begin failures++; $display("got %0d words", got); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
