// tb_event_counter: pulses of random width at random (asynchronous)
// times. Pulses longer than 20 ns must each be counted once; pulses of
// 3 ns can be sampled at most once and must never be counted; while
// `clear` is high the count stays zero. Also checks the paper's >20 ns
// rule at its edge (21 ns pulses).
`timescale 1ns/1ps
module tb_event_counter;
  logic clk = 1'b0, rst_n = 1'b0, trig = 1'b0, clear = 1'b0;
  logic inc;
  logic [31:0] count, count_next;
  int checks = 0, failures = 0;
  int expected = 0;

  event_counter dut (.clk_wr(clk), .rst_n, .trig, .clear, .inc, .count, .count_next);

  always #4 clk = ~clk;

  task automatic check_count(input string what);
    checks++;
    if (count !== 32'(expected)) begin
      failures++;
      $display("%s: count=%0d expected %0d", what, count, expected);
    end
  endtask

  initial begin
    real w;
    #20 rst_n = 1'b1;
    #13.3;
    for (int n = 0; n < 300; n++) begin
      int kind;
      kind = $urandom_range(0, 2);
      w = (kind == 0) ? 3.0 : (kind == 1) ? 21.0 : 21.0 + $urandom_range(0, 200);
      trig = 1'b1; #(w);
      trig = 1'b0; #(40.0 + $urandom_range(0, 50) + 0.37 * $urandom_range(0, 20));
      if (kind != 0) expected++;
      check_count("after pulse");
    end
    // clear holds the counter at zero
    clear = 1'b1;
    #50;
    for (int n = 0; n < 5; n++) begin trig = 1'b1; #30; trig = 1'b0; #50; end
    expected = 0;
    check_count("while clear");
    clear = 1'b0;
    #20;
    trig = 1'b1; #30; trig = 1'b0; #60;
    expected = 1;
    check_count("after clear");
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
