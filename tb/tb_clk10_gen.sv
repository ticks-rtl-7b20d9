// tb_clk10_gen: no output before the first PPS; then a 10 MHz square
// wave (100 ns period, 50 % duty) whose first rising edge coincides with
// the re-timed PPS output, and whose rising edges keep coinciding with
// the PPS output at a later PPS a whole number of periods later.
`timescale 1ns/1ps
module tb_clk10_gen;
  logic clk200 = 1'b0, rst_n = 1'b0, pps = 1'b0, clk10, pps_out, running;
  int checks = 0, failures = 0, nrise = 0, npps = 0;
  realtime last_rise = -1.0, first_rise = -1.0;

  clk10_gen dut (.clk200, .rst_n, .pps, .clk10, .pps_out, .running);

  initial forever begin clk200 = 1'b1; #2.5; clk200 = 1'b0; #2.5; end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $realtime); end
  endtask

  always @(posedge clk10) begin
    nrise++;
    if (last_rise >= 0) check($realtime - last_rise == 100.0, "period");
    else first_rise = $realtime;
    last_rise = $realtime;
  end
  always @(negedge clk10) check($realtime - last_rise == 50.0, "duty cycle");
  always @(posedge pps_out) begin
    npps++;
    #0.1;
    check(last_rise == $realtime - 0.1, "clk10 rises with PPS output");
  end

  initial begin
    #103;
    rst_n = 1'b1;
    #398;            // 501 ns: between 200 MHz edges
    check(nrise == 0 && !running, "idle before PPS");
    pps = 1'b1; #8 pps = 1'b0;
    #(10000.0 - 8.0) pps = 1'b1;   // next PPS 10 us later (100 periods)
    #8 pps = 1'b0;
    #1000;
    check(first_rise == 505.0, $sformatf("first edge at %0t", first_rise));
    check(npps == 2 && nrise > 100, $sformatf("%0d PPS, %0d edges", npps, nrise));
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
