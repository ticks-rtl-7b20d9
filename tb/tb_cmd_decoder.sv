// tb_cmd_decoder: sends each command as a word stream and checks the
// registers and pulses, the destination IP formed from the own IP, and
// that a wrong length or an unknown opcode is rejected.
module tb_cmd_decoder;
  import ticks_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic rx_valid = 1'b0, rx_last = 1'b0;
  logic [15:0] rx_data = '0, dest_port;
  logic [31:0] own_ip = 32'hC0A8_1234, dest_ip;
  logic [47:0] dest_mac;
  logic [39:0] ext_tai;
  logic [26:0] ext_coarse;
  logic ext_arm, cmd_reset, cmd_getready, bad_cmd;
  int checks = 0, failures = 0;
  int n_arm = 0, n_reset = 0, n_ready = 0, n_bad = 0;

  cmd_decoder dut (.clk_sys(clk), .rst_n, .rx_valid, .rx_data, .rx_last, .own_ip,
    .dest_mac, .dest_ip, .dest_port, .ext_tai, .ext_coarse, .ext_arm, .cmd_reset,
    .cmd_getready, .bad_cmd);

  always #8 clk = ~clk;
  always @(posedge clk) if (rst_n) begin
    n_arm += int'(ext_arm); n_reset += int'(cmd_reset);
    n_ready += int'(cmd_getready); n_bad += int'(bad_cmd);
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input logic [15:0] w [$]);
    for (int i = 0; i < w.size(); i++) begin
      @(negedge clk);
      rx_valid = 1'b1; rx_data = w[i]; rx_last = (i == w.size() - 1);
      @(negedge clk);
      rx_valid = 1'b0; rx_last = 1'b0;
      if ($urandom_range(0, 1)) @(negedge clk);   // gap between words
    end
    repeat (2) @(negedge clk);
  endtask

  initial begin
    logic [15:0] w [$];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(dest_mac == 48'hFFFF_FFFF_FFFF, "default MAC");
    check(dest_ip == 32'hC0A8_10FE, $sformatf("dest IP %h", dest_ip));
    check(dest_port == 16'd50000, "dest port");
    w = '{16'h0001, 16'h0011, 16'h2233, 16'h4455}; send(w);
    check(dest_mac == 48'h0011_2233_4455, "MAC set");
    w = '{16'h0002, 16'h0000, 16'h00AB, 16'hCDEF, 16'h0123, 16'h4567}; send(w);
    check(ext_tai == {8'h00, 16'h00AB, 16'hCDEF} && ext_coarse == 27'h123_4567,
          $sformatf("ext time %h %h", ext_tai, ext_coarse));
    check(n_arm == 1, "arm pulse");
    w = '{16'h0003}; send(w);
    check(n_reset == 1 && n_ready == 0, $sformatf("reset pulse %0d %0d %0d %0d", n_reset, n_ready, n_arm, n_bad));
    w = '{16'h0004}; send(w);
    check(n_ready == 1, "get-ready pulse");
    w = '{16'h0001, 16'h9999}; send(w);
    check(n_bad == 1 && dest_mac == 48'h0011_2233_4455, "short MAC rejected");
    w = '{16'h0077, 16'h0001}; send(w);
    check(n_bad == 2, "unknown opcode");
    w = '{16'h0003, 16'h0000}; send(w);
    check(n_bad == 3 && n_reset == 1, "long reset rejected");
    own_ip = 32'h0A00_07FF;
    #1 check(dest_ip == 32'h0A00_04FE, "dest IP follows own IP");
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
