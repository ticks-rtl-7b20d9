// tb_coarse_tdc: the tick counter zeroes after each PPS and counts every
// tick in between. PPS pulses come at irregular intervals; a reference
// count is kept in the testbench.
module tb_coarse_tdc;
  logic clk = 1'b0, rst_n = 1'b0, pps = 1'b0;
  logic [26:0] coarse;
  int checks = 0, failures = 0;
  int ref_cnt;

  coarse_tdc dut (.clk_wr(clk), .rst_n, .pps, .coarse);

  always #4 clk = ~clk;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    ref_cnt = 0;
    for (int n = 0; n < 3000; n++) begin
      pps = ($urandom_range(0, 199) == 0);
      @(negedge clk);
      ref_cnt = pps ? 0 : ref_cnt + 1;
      checks++;
      if (coarse !== 27'(ref_cnt)) begin
        failures++;
        if (failures < 5) $display("cycle %0d: coarse=%0d expected %0d", n, coarse, ref_cnt);
      end
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
