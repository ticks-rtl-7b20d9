// tb_iserdes_sr: checks the 1 GHz -> 125 MHz deserializer.
// A pseudo-random bit pattern is driven, one bit per 1 ns, a quarter
// nanosecond after each fast edge; every 125 MHz word is compared with the
// eight pattern bits sampled during the previous 8 ns, oldest in the MSB.
`timescale 1ns/1ps
module tb_iserdes_sr;
  logic clk_fast = 1'b0, clk_wr = 1'b0, rst_n = 1'b0, din = 1'b0;
  logic [7:0] word;
  int checks = 0, failures = 0;
  bit pat [0:4095];

  iserdes_sr dut (.clk_fast, .clk_wr, .rst_n, .din, .word);

  // fast posedges at integer ns, WR posedges at multiples of 8 ns
  initial forever begin clk_fast = 1'b1; #0.5; clk_fast = 1'b0; #0.5; end
  initial forever begin clk_wr = 1'b1; #4; clk_wr = 1'b0; #4; end

  initial begin
    for (int i = 0; i < 4096; i++) pat[i] = 1'($urandom_range(0, 1));
    #0.25;
    for (int k = 0; k < 4000; k++) begin
      din = pat[k];          // sampled at fast edge k+1
      #1;
    end
  end

  initial begin
    logic [7:0] exp;
    #20 rst_n = 1'b1;
    for (int m = 4; m < 480; m++) begin
      wait ($realtime >= 8.0 * m + 2.0);
      for (int b = 0; b < 8; b++) exp[7-b] = pat[8*m-9+b];
      checks++;
      if (word !== exp) begin
        failures++;
        if (failures < 5) $display("word %0d: got %b expected %b", m, word, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
