// ticks_top: time-stamping firmware added to a White Rabbit node.
//
// Two trigger lines from the camera (read-out and busy) are time-stamped
// to 1 ns: a 1 GHz deserializer and fine TDC give the nanosecond inside
// the 8 ns WR-clock tick, a coarse counter zeroed by the WR PPS gives the
// tick, and the WR core gives the TAI second. Each time-stamp crosses to
// the 62.5 MHz system clock, waits up to 400 ns for the camera's 16-bit
// SPI word, and is written as a 12-byte record into one of two ping-pong
// FIFOs. Bunches of up to 20 records (or whatever arrived in 200 ms) are
// sent, followed by a 20-byte tailer, as a 16-bit word stream to a UDP
// stack. Commands received from the UDP stack set the destination MAC,
// schedule an external trigger at a TAI time, and run the counter
// reset / get-ready sequence. A 10 MHz clock aligned to the PPS and the
// PPS itself are sent to the camera.
//
// Not inside this module (brought out as ports): the White Rabbit core
// (clk_wr, wr_pps, wr_tai), the PLLs (clk_fast 1 GHz, clk_sys 62.5 MHz,
// clk200 200 MHz, all from the WR clock), the UDP/IP stack (tx_*, rx_*,
// own_ip, dest_*) and the LVDS buffers. rst_n is one asynchronous,
// active-low reset for all domains (this design's choice).
module ticks_top
  import ticks_pkg::*;
#(
  parameter int unsigned SER_W         = 8,
  parameter int unsigned SPI_TIMEOUT   = 25,          // 400 ns at 62.5 MHz
  parameter int unsigned BUNCH_EVENTS  = 20,
  parameter int unsigned BUNCH_TIMEOUT = 12_500_000,  // 200 ms at 62.5 MHz
  parameter int unsigned FIFO_DEPTH    = 40,
  parameter int unsigned CLK10_DIV     = 20
) (
  input  logic                clk_fast,
  input  logic                clk_wr,
  input  logic                clk_sys,
  input  logic                clk200,
  input  logic                rst_n,
  // White Rabbit core
  input  logic                wr_pps,
  input  logic [TAI_W-1:0]    wr_tai,
  // camera inputs
  input  logic                trig_readout,
  input  logic                trig_busy,
  input  logic                spi_sck,
  input  logic                spi_cs_n,
  input  logic                spi_mosi,
  // camera outputs
  output logic                pps_out,
  output logic                clk10_out,
  output logic                ext_trig_out,
  // UDP stack, transmit
  output logic                tx_valid,
  input  logic                tx_ready,
  output logic [15:0]         tx_data,
  output logic                tx_last,
  output logic [15:0]         tx_len,
  output logic [47:0]         dest_mac,
  output logic [31:0]         dest_ip,
  output logic [15:0]         dest_port,
  // UDP stack, receive
  input  logic                rx_valid,
  input  logic [15:0]         rx_data,
  input  logic                rx_last,
  input  logic [31:0]         own_ip,
  // status
  output logic [CNT_W-1:0]    evt_count_ro,
  output logic [CNT_W-1:0]    evt_count_busy,
  output logic [CNT_W-1:0]    pps_count,
  output logic [1:0]          cnt_state,
  output logic                ts_dropped,
  output logic                ev_lost,
  output logic                bad_cmd,
  output logic                ext_armed,
  output logic                clk10_running,
  output logic                bunch_close_full,
  output logic                bunch_close_timeout
);

  // WR-clock domain ---------------------------------------------------
  logic [COARSE_W-1:0] coarse, coarse_busy;
  logic                cnt_clear, sync_trig;
  logic                wr_reset, wr_getready, wr_arm;
  logic                drop_ro, drop_busy;
  logic                ch_ts_valid [2];
  ts_t                 ch_ts       [2];
  logic                ch_ts_done  [2];
  logic [TAI_W-1:0]    ext_tai;
  logic [COARSE_W-1:0] ext_coarse;

  assign ts_dropped = drop_ro | drop_busy;

  coarse_tdc #(.COARSE_W(COARSE_W)) u_coarse (
    .clk_wr, .rst_n, .pps(wr_pps), .coarse);

  // second coarse TDC for the busy channel (two instances of all TDCs and
  // counters, as in the original firmware); same PPS, same count
  coarse_tdc #(.COARSE_W(COARSE_W)) u_coarse_busy (
    .clk_wr, .rst_n, .pps(wr_pps), .coarse(coarse_busy));

  sync_ctrl #(.CNT_W(CNT_W)) u_sync (
    .clk_wr, .rst_n, .pps(wr_pps), .cmd_reset(wr_reset),
    .cmd_getready(wr_getready), .cnt_clear, .pps_count, .sync_trig,
    .state_o(cnt_state));

  ts_channel #(.SER_W(SER_W)) u_ch_ro (
    .clk_fast, .clk_wr, .clk_sys, .rst_n, .trig(trig_readout), .coarse,
    .tai(wr_tai), .pps_cnt(pps_count), .cnt_clear, .evt_count(evt_count_ro),
    .dropped(drop_ro), .ts_valid(ch_ts_valid[0]), .ts(ch_ts[0]),
    .ts_done(ch_ts_done[0]));

  ts_channel #(.SER_W(SER_W)) u_ch_busy (
    .clk_fast, .clk_wr, .clk_sys, .rst_n, .trig(trig_busy), .coarse(coarse_busy),
    .tai(wr_tai), .pps_cnt(pps_count), .cnt_clear,
    .evt_count(evt_count_busy), .dropped(drop_busy),
    .ts_valid(ch_ts_valid[1]), .ts(ch_ts[1]), .ts_done(ch_ts_done[1]));

  ext_trigger u_ext (
    .clk_wr, .rst_n, .tai(wr_tai), .coarse, .arm(wr_arm), .tgt_tai(ext_tai),
    .tgt_coarse(ext_coarse), .sync_trig, .ext_trig(ext_trig_out),
    .armed(ext_armed));

  // 200 MHz domain ----------------------------------------------------
  clk10_gen #(.DIV(CLK10_DIV)) u_clk10 (
    .clk200, .rst_n, .pps(wr_pps), .clk10(clk10_out), .pps_out,
    .running(clk10_running));

  // system (62.5 MHz) domain ------------------------------------------
  logic             spi_valid;
  logic [SPI_W-1:0] spi_data;
  logic             ev_valid [2];
  event_t           ev       [2];
  logic             ev_ready [2];
  logic             bunch_valid, rd_en, bunch_done;
  logic [NEV_W-1:0] bunch_nev;
  logic [TAILER_W-1:0] bunch_tailer;
  logic [REC_W-1:0] rd_data;
  logic             sys_reset, sys_getready, sys_arm;

  spi_rx #(.SPI_W(SPI_W)) u_spi (
    .rst_n, .sck(spi_sck), .cs_n(spi_cs_n), .mosi(spi_mosi), .clk_sys,
    .valid(spi_valid), .data(spi_data));

  for (genvar c = 0; c < 2; c++) begin : g_asm
    event_assembler #(.TIMEOUT_CYC(SPI_TIMEOUT), .CH(1'(c))) u_asm (
      .clk_sys, .rst_n, .ts_valid(ch_ts_valid[c]), .ts(ch_ts[c]),
      .ts_done(ch_ts_done[c]), .spi_valid, .spi_data,
      .ev_valid(ev_valid[c]), .ev(ev[c]), .ev_ready(ev_ready[c]));
  end

  bunch_builder #(
    .BUNCH_EVENTS(BUNCH_EVENTS), .BUNCH_TIMEOUT(BUNCH_TIMEOUT),
    .DEPTH(FIFO_DEPTH)
  ) u_bunch (
    .clk_sys, .rst_n,
    .ev0_valid(ev_valid[0]), .ev0(ev[0]), .ev0_ready(ev_ready[0]),
    .ev1_valid(ev_valid[1]), .ev1(ev[1]), .ev1_ready(ev_ready[1]),
    .bunch_valid, .bunch_nev, .bunch_tailer, .rd_en, .rd_data, .bunch_done,
    .lost(ev_lost), .close_full(bunch_close_full),
    .close_timeout(bunch_close_timeout));

  packet_tx u_tx (
    .clk_sys, .rst_n, .bunch_valid, .bunch_nev, .bunch_tailer, .rd_data,
    .rd_en, .bunch_done, .tx_valid, .tx_ready, .tx_data, .tx_last, .tx_len);

  cmd_decoder u_cmd (
    .clk_sys, .rst_n, .rx_valid, .rx_data, .rx_last, .own_ip, .dest_mac,
    .dest_ip, .dest_port, .ext_tai, .ext_coarse, .ext_arm(sys_arm),
    .cmd_reset(sys_reset), .cmd_getready(sys_getready), .bad_cmd);

  // commands into the WR-clock domain
  pulse_sync u_ps_reset (.clk_src(clk_sys), .rst_src_n(rst_n), .src_pulse(sys_reset),
    .clk_dst(clk_wr), .rst_dst_n(rst_n), .dst_pulse(wr_reset));
  pulse_sync u_ps_ready (.clk_src(clk_sys), .rst_src_n(rst_n), .src_pulse(sys_getready),
    .clk_dst(clk_wr), .rst_dst_n(rst_n), .dst_pulse(wr_getready));
  pulse_sync u_ps_arm (.clk_src(clk_sys), .rst_src_n(rst_n), .src_pulse(sys_arm),
    .clk_dst(clk_wr), .rst_dst_n(rst_n), .dst_pulse(wr_arm));

endmodule
