// tb_ticks_top: end-to-end test of the time-stamping firmware.
//
// Models around the design: a White Rabbit core (125 MHz clock, PPS every
// SEC_TICKS ticks - a shortened "second" - and TAI seconds), a camera
// (trigger pulses on the read-out and busy lines at random 1 ns positions,
// each followed or not by a 16-bit SPI word at 50 MHz) and a UDP stack
// (consumes the 16-bit packet stream with occasional back-pressure, and
// delivers command datagrams). Every packet is decoded: its length, each
// record's channel, SPI word and event number, and the time-stamp, whose
// offset from the injection time must be the same (to the nanosecond) for
// all events of a channel. The tailer must match the last record.
//
// Mechanisms exercised and counted (each must occur): bunch closed at 20
// events, bunch closed by time-out, ping-pong swap, trigger dropped in the
// dead time, SPI time-out, event lost on a full FIFO, back-pressure from
// the UDP stack, busy-channel events, destination MAC command, external
// trigger at a commanded time, reset / get-ready sequence, malformed
// command, 10 MHz output aligned with the PPS output. The dead time
// after a trigger is measured on the read-out channel and must lie
// between 0.48 and 0.60 us.
//
// The bunch time-out is shortened to BUNCH_TMO cycles; all other
// parameters are at their defaults.
`timescale 1ns/1ps
module tb_ticks_top;
  import ticks_pkg::*;

  localparam int SEC_TICKS = 25000;      // 200 us between PPS pulses
  localparam int BUNCH_TMO = 5000;       // 80 us

  logic clk_fast = 1'b0, clk_wr = 1'b0, clk_sys = 1'b0, clk200 = 1'b0, rst_n = 1'b1;
  logic wr_pps = 1'b0;
  logic [39:0] wr_tai = 40'd1_000_000;
  logic trig_readout = 1'b0, trig_busy = 1'b0, spi_sck = 1'b0, spi_cs_n = 1'b0, spi_mosi = 1'b0;
  logic pps_out, clk10_out, ext_trig_out;
  logic tx_valid, tx_ready = 1'b1, tx_last;
  logic [15:0] tx_data, tx_len, dest_port;
  logic [47:0] dest_mac;
  logic [31:0] dest_ip, own_ip = 32'hC0A8_0142;
  logic rx_valid = 1'b0, rx_last = 1'b0;
  logic [15:0] rx_data = '0;
  logic [31:0] evt_count_ro, evt_count_busy, pps_count;
  logic [1:0] cnt_state;
  logic ts_dropped, ev_lost, bad_cmd, ext_armed, clk10_running, close_full, close_timeout;

  ticks_top #(.BUNCH_TIMEOUT(BUNCH_TMO)) dut (
    .clk_fast, .clk_wr, .clk_sys, .clk200, .rst_n, .wr_pps, .wr_tai, .trig_readout,
    .trig_busy, .spi_sck, .spi_cs_n, .spi_mosi, .pps_out, .clk10_out, .ext_trig_out,
    .tx_valid, .tx_ready, .tx_data, .tx_last, .tx_len, .dest_mac, .dest_ip, .dest_port,
    .rx_valid, .rx_data, .rx_last, .own_ip, .evt_count_ro, .evt_count_busy, .pps_count,
    .cnt_state, .ts_dropped, .ev_lost, .bad_cmd, .ext_armed, .clk10_running,
    .bunch_close_full(close_full), .bunch_close_timeout(close_timeout));

  // clocks: all rising together at t = 0 (outputs of one PLL)
  initial forever begin clk_fast = 1'b1; #0.5; clk_fast = 1'b0; #0.5; end
  initial forever begin clk_wr   = 1'b1; #4;   clk_wr   = 1'b0; #4;   end
  initial forever begin clk_sys  = 1'b1; #8;   clk_sys  = 1'b0; #8;   end
  initial forever begin clk200   = 1'b1; #2.5; clk200   = 1'b0; #2.5; end

  // White Rabbit core model
  int tick = SEC_TICKS - 50;   // first PPS 400 ns after start
  always @(posedge clk_wr) begin
    if (tick == SEC_TICKS - 1) begin tick <= 0; wr_pps <= 1'b1; end
    else begin tick <= tick + 1; wr_pps <= 1'b0; end
    if (wr_pps) wr_tai <= wr_tai + 1;
  end

  int checks = 0, failures = 0;
  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $realtime);
    end
  endtask

  // ------------------------------------------------------------------
  // expected events, in injection order (dropped triggers excluded)
  typedef struct {
    logic        ch;
    longint      t_abs;
    logic        spi_valid;
    logic [15:0] spi;
    int          evt_no;
  } exp_t;
  exp_t exp_q [$];
  int   evt_no [2] = '{0, 0};
  longint offs [2] = '{-1, -1};

  // mechanism counters
  int m_full = 0, m_tmo = 0, m_swap = 0, m_drop = 0, m_spi_tmo = 0, m_lost = 0;
  int m_bp = 0, m_busy = 0, m_mac = 0, m_ext = 0, m_sync = 0, m_bad = 0, m_clk10 = 0;
  int n_pkt = 0, n_rec = 0;
  logic fill_prev = 1'b0;

  // dead time of the read-out channel: from a trigger that finds the
  // channel free to the moment the channel accepts triggers again
  realtime t_dead_start, dead_min = 1.0e9, dead_max = 0.0;
  logic    dead_timing = 1'b0;
  int      m_dead = 0;
  always @(posedge trig_readout) if (rst_n && !dut.u_ch_ro.busy && !dead_timing) begin
    t_dead_start = $realtime;
    dead_timing  = 1'b1;
  end
  always @(negedge dut.u_ch_ro.busy) if (dead_timing) begin
    dead_timing = 1'b0;
    m_dead++;
    if ($realtime - t_dead_start < dead_min) dead_min = $realtime - t_dead_start;
    if ($realtime - t_dead_start > dead_max) dead_max = $realtime - t_dead_start;
  end

  always @(negedge clk_sys) if (rst_n) begin
    if (close_full) m_full++;
    if (close_timeout) m_tmo++;
    if (ev_lost) m_lost++;
    if (bad_cmd) m_bad++;
    if (tx_valid && !tx_ready) m_bp++;
    fill_prev <= dut.u_bunch.fill_sel;
    if (dut.u_bunch.fill_sel != fill_prev) m_swap++;
  end
  always @(negedge clk_wr) if (rst_n && ts_dropped) m_drop++;

  // PPS output and 10 MHz output leave on the same edge
  always @(posedge pps_out) begin
    #0.1;
    check(clk10_out === 1'b1, "10 MHz high at PPS");
    if (clk10_out) m_clk10++;
  end

  // ------------------------------------------------------------------
  // camera model
  task automatic spi_send(input logic [15:0] w);
    spi_cs_n = 1'b0;
    for (int b = 15; b >= 0; b--) begin
      spi_mosi = w[b]; #10; spi_sck = 1'b1; #10; spi_sck = 1'b0;
    end
    #5 spi_cs_n = 1'b1;
  endtask

  // one trigger at the next whole ns + 0.3; with_spi: send a word after it;
  // extra: a second pulse on the same line 150 ns later (dead time)
  task automatic inject(input logic ch, input logic with_spi, input logic extra);
    exp_t e;
    longint t;
    t = longint'($ceil($realtime));
    #(real'(t) - $realtime + 0.3);
    e.ch = ch; e.t_abs = t; e.spi_valid = with_spi; e.spi = 16'($urandom);
    if (!with_spi) e.spi = '0;
    evt_no[ch]++;
    e.evt_no = evt_no[ch];
    exp_q.push_back(e);
    if (ch) trig_busy = 1'b1; else trig_readout = 1'b1;
    fork
      begin #40; trig_busy = 1'b0; trig_readout = 1'b0; end
      begin if (with_spi) begin #20; spi_send(e.spi); end end
    join
    if (extra) begin
      #(110 + $urandom_range(0, 40));
      if (ch) trig_busy = 1'b1; else trig_readout = 1'b1;
      #30; trig_busy = 1'b0; trig_readout = 1'b0;
      evt_no[ch]++;
    end
  endtask

  // ------------------------------------------------------------------
  // UDP stack model: receive and decode packets
  logic [15:0] pkt [$];
  logic random_bp = 1'b1;
  always @(posedge clk_sys) if (random_bp) tx_ready <= ($urandom_range(0, 9) != 0);

  // sampled between edges: a word is taken at the next rising edge
  always @(negedge clk_sys) if (rst_n && tx_valid && tx_ready) begin
    pkt.push_back(tx_data);
    if (tx_last) begin
      check(tx_len == 16'(2 * pkt.size()), $sformatf("length %0d for %0d words", tx_len, pkt.size()));
      decode_packet();
      pkt.delete();
    end
  end

  task automatic decode_packet();
    int n;
    logic [REC_W-1:0] r;
    logic [TAILER_W-1:0] tl;
    logic [39:0] tai_full;
    longint t_ts, off;
    exp_t e;
    n_pkt++;
    n = (pkt.size() - 10) / 6;
    check(pkt.size() == 6 * n + 10 && n >= 1 && n <= 40, "packet shape");
    for (int w = 0; w < 10; w++) tl[159 - 16*w -: 16] = pkt[6*n + w];
    check(32'(tl[88:83]) == 32'(n), "tailer event count");
    for (int i = 0; i < n; i++) begin
      for (int w = 0; w < 6; w++) r[95 - 16*w -: 16] = pkt[6*i + w];
      n_rec++;
      if (exp_q.size() == 0) begin check(1'b0, "unexpected record"); continue; end
      e = exp_q.pop_front();
      check(r[95] == e.ch, $sformatf("channel (record %0d)", n_rec));
      check(r[94] == e.spi_valid, $sformatf("SPI valid (record %0d)", n_rec));
      if (e.spi_valid) check(r[93:78] == e.spi, "SPI word");
      else m_spi_tmo++;
      if (e.ch) m_busy++;
      check(r[77:54] == 24'(e.evt_no), $sformatf("event number %0d exp %0d", r[77:54], e.evt_no));
      tai_full = {tl[159:136], r[45:30]};
      t_ts = longint'(tai_full) * SEC_TICKS * 8 + longint'(r[29:3]) * 8 + longint'(r[2:0]);
      off = t_ts - e.t_abs;
      if (offs[e.ch] < 0) offs[e.ch] = off;
      check(off == offs[e.ch], $sformatf("time-stamp offset %0d, first was %0d", off, offs[e.ch]));
      if (i == n - 1)
        check(tl[119:93] == r[29:3] && tl[92:90] == r[2:0] && tl[89] == r[95] &&
              tl[77:51] == 27'(r[77:54]) && tl[135:120] == r[45:30], "tailer matches last record");
    end
  endtask

  // ------------------------------------------------------------------
  task automatic send_cmd(input logic [15:0] w [$]);
    for (int i = 0; i < w.size(); i++) begin
      @(negedge clk_sys);
      rx_valid = 1'b1; rx_data = w[i]; rx_last = (i == w.size() - 1);
      @(negedge clk_sys);
      rx_valid = 1'b0; rx_last = 1'b0;
    end
    repeat (4) @(negedge clk_sys);
  endtask

  initial begin
    logic [15:0] cw [$];
    logic [39:0] tgt_tai;
    int lost_before, nq;
    #1 rst_n = 1'b0;
    #1 spi_cs_n = 1'b1;
    #100 rst_n = 1'b1;
    #500;

    // destination MAC
    cw = '{16'h0001, 16'h0200, 16'h5E00, 16'h0042}; send_cmd(cw);
    check(dest_mac == 48'h0200_5E00_0042, "destination MAC");
    check(dest_ip == 32'hC0A8_00FE && dest_port == 16'd50000, "destination IP / port");
    if (dest_mac == 48'h0200_5E00_0042) m_mac++;
    cw = '{16'h0009}; send_cmd(cw);                 // malformed

    // phase 1: mixed traffic, 45 events (two full bunches + rest)
    for (int i = 0; i < 45; i++) begin
      inject((i % 7 == 3), (i % 5 != 2), (i % 9 == 4));
      #(600 + $urandom_range(0, 900));
    end
    // rest goes out at the bunch time-out
    #(BUNCH_TMO * 16 + 20000);
    check(exp_q.size() == 0, $sformatf("phase 1: %0d events not received", exp_q.size()));

    // phase 2: UDP stack stalled, FIFOs overflow
    random_bp = 1'b0;
    @(posedge clk_sys) tx_ready <= 1'b0;
    lost_before = m_lost;
    for (int i = 0; i < 70; i++) begin
      inject(1'b0, 1'b1, 1'b0);
      #(400 + $urandom_range(0, 50));
    end
    #2000;
    // lost events are the most recent ones
    nq = m_lost - lost_before;
    check(nq > 0, "events lost while stalled");
    repeat (nq) void'(exp_q.pop_back());
    @(posedge clk_sys) tx_ready <= 1'b1;   // changes only just after an edge
    random_bp = 1'b1;
    #(BUNCH_TMO * 16 + 20000);
    check(exp_q.size() == 0, $sformatf("phase 2: %0d events not received", exp_q.size()));

    // external trigger at a commanded TAI time
    tgt_tai = wr_tai + 1;
    cw = '{16'h0002, 16'(tgt_tai[39:32]), tgt_tai[31:16], tgt_tai[15:0], 16'h0000, 16'd1000};
    send_cmd(cw);
    check(ext_armed, "external trigger armed");
    wait (ext_trig_out);
    check(wr_tai == tgt_tai && dut.coarse == 27'd1001, $sformatf("external trigger at %0d.%0d", wr_tai, dut.coarse));
    if (wr_tai == tgt_tai) m_ext++;
    #100;

    // reset / get-ready sequence
    cw = '{16'h0003}; send_cmd(cw);
    #100;
    check(cnt_state == 2'd1 && evt_count_ro == 0 && pps_count == 0, "counters held after reset");
    evt_no = '{0, 0};
    inject(1'b0, 1'b1, 1'b0);
    evt_no[0] = 0; exp_q[exp_q.size()-1].evt_no = 0;   // held at zero
    #1000;
    check(evt_count_ro == 0, "held counter stays zero");
    cw = '{16'h0004}; send_cmd(cw);
    check(cnt_state == 2'd2 && !ext_trig_out, "waiting for PPS");
    wait (ext_trig_out);
    #20;
    check(cnt_state == 2'd0 && pps_count == 0 && evt_count_ro == 0, "released at zero after PPS");
    if (cnt_state == 2'd0) m_sync++;
    inject(1'b0, 1'b1, 1'b0);
    #2000;
    check(evt_count_ro == 1, "counting from zero");
    #(BUNCH_TMO * 16 + 20000);
    check(exp_q.size() == 0, $sformatf("end: %0d events not received", exp_q.size()));

    // every mechanism must have happened
    check(m_full > 0, "bunch closed at 20 events");
    check(m_tmo > 0, "bunch closed by time-out");
    check(m_swap > 2, "ping-pong swaps");
    check(m_drop > 0, "trigger dropped in dead time");
    check(m_spi_tmo > 0, "SPI time-out");
    check(m_lost > 0, "event lost on full FIFO");
    check(m_bp > 0, "UDP back-pressure");
    check(m_busy > 0, "busy-channel events");
    check(m_mac > 0 && m_ext > 0 && m_sync > 0 && m_bad > 0, "commands");
    check(m_clk10 > 0, "10 MHz aligned with PPS");
    // 400 ns SPI wait plus capture and both crossings: 0.48-0.60 us
    check(m_dead > 0 && dead_min > 480.0 && dead_min < 600.0,
          $sformatf("dead time %0.1f ns", dead_min));
    $display("dead time after a trigger: min %0.1f ns, max %0.1f ns over %0d triggers",
             dead_min, dead_max, m_dead);
    $display("mechanisms: full=%0d timeout=%0d swaps=%0d dropped=%0d spi_timeout=%0d lost=%0d backpressure=%0d busy=%0d mac=%0d ext=%0d sync=%0d bad_cmd=%0d clk10_aligned=%0d",
             m_full, m_tmo, m_swap, m_drop, m_spi_tmo, m_lost, m_bp, m_busy, m_mac, m_ext, m_sync, m_bad, m_clk10);
    $display("packets=%0d records=%0d", n_pkt, n_rec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
