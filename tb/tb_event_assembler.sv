// tb_event_assembler: a time-stamp with an SPI word 20 cycles later must
// give an event with that word, offered as soon as it arrives; one without
// SPI must be offered at the 400 ns (25 cycle) time-out with SPI-valid
// clear. In both cases the time-stamp is released no sooner than the
// time-out, and an SPI word after the event is written is not attached.
module tb_event_assembler;
  import ticks_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic ts_valid = 1'b0, ts_done, spi_valid = 1'b0, ev_valid, ev_ready = 1'b1;
  ts_t ts = '0;
  logic [15:0] spi_data = '0;
  event_t ev;
  int checks = 0, failures = 0;

  event_assembler #(.CH(1'b1)) dut (.clk_sys(clk), .rst_n, .ts_valid, .ts, .ts_done,
    .spi_valid, .spi_data, .ev_valid, .ev, .ev_ready);

  always #8 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // spi_at < 0: no SPI word; ready_delay: cycles ev_ready is held low
  task automatic one(input int spi_at, input int ready_delay);
    int t, t_ev, t_done;
    logic [15:0] w;
    w = 16'($urandom);
    @(negedge clk);
    ts = ts_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
    ts_valid = 1'b1;
    ev_ready = (ready_delay == 0);
    t_ev = -1; t_done = -1;
    for (t = 0; t < 60 && t_done < 0; t++) begin
      spi_valid = (t == spi_at);
      spi_data  = w;
      if (t >= ready_delay) ev_ready = 1'b1;
      #1;
      if (ev_valid && ev_ready && t_ev < 0) begin
        t_ev = t;
        check(ev.ch == 1'b1, "channel");
        check(ev.ts == ts, "time-stamp");
        check(ev.spi_valid == (spi_at >= 0), "spi valid");
        if (spi_at >= 0) check(ev.spi == w, "spi word");
      end
      if (ts_done) t_done = t;
      @(negedge clk);
      spi_valid = 1'b0;
      if (t_done >= 0) ts_valid = 1'b0;   // the crossing stage lowers the flag
    end
    if (spi_at >= 0) check(t_ev == ((spi_at + 1 > ready_delay) ? spi_at + 1 : ready_delay),
                           $sformatf("event early (t=%0d)", t_ev));
    else             check(t_ev == ((25 > ready_delay) ? 25 : ready_delay),
                           $sformatf("event at time-out (t=%0d)", t_ev));
    check(t_done >= 25, $sformatf("release not before 400 ns (t=%0d)", t_done));
    check(t_done <= ((t_ev > 25) ? t_ev : 25) + 2, "release soon after");
    repeat (2) @(negedge clk);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(20, 0);
    one(-1, 0);
    one(3, 0);
    one(10, 30);
    one(-1, 40);
    for (int n = 0; n < 20; n++) one($urandom_range(0, 1) ? $urandom_range(0, 24) : -1, $urandom_range(0, 1) ? 0 : $urandom_range(0, 30));
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
