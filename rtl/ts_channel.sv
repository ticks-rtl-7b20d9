// ts_channel: one time-stamping channel (read-out or busy trigger).
//
// The trigger feeds both the 1 GHz deserializer / fine TDC and, in
// parallel, the event counter. A front found by the fine TDC is combined
// with the coarse count, TAI seconds and PPS counter into a time-stamp,
// which is passed to the 62.5 MHz system domain. The paper implements two
// instances of all TDCs and counters, one per trigger line; this module
// is one such instance, apart from the coarse counter, which the top
// level instantiates next to it (one per channel) and feeds in.
//
// Interface: clk_fast/clk_wr/rst_n, trig; coarse, tai, pps_cnt and
// cnt_clear in clk_wr; clk_sys side: ts_valid, ts, ts_done. Outputs
// evt_count and dropped (front ignored during dead time) for monitoring.
module ts_channel
  import ticks_pkg::*;
#(
  parameter int unsigned SER_W    = 8,
  parameter int unsigned MIN_HIGH = 2
) (
  input  logic                clk_fast,
  input  logic                clk_wr,
  input  logic                clk_sys,
  input  logic                rst_n,
  input  logic                trig,
  input  logic [COARSE_W-1:0] coarse,
  input  logic [TAI_W-1:0]    tai,
  input  logic [CNT_W-1:0]    pps_cnt,
  input  logic                cnt_clear,
  output logic [CNT_W-1:0]    evt_count,
  output logic                dropped,
  output logic                ts_valid,
  output ts_t                 ts,
  input  logic                ts_done
);

  logic [SER_W-1:0]  word;
  logic              hit;
  logic [FINE_W-1:0] fine;
  logic              evt_inc;
  logic [CNT_W-1:0]  evt_count_next;
  ts_t               cap_ts;
  logic              cap_load, busy;

  iserdes_sr #(.SER_W(SER_W)) u_serdes (
    .clk_fast, .clk_wr, .rst_n, .din(trig), .word);

  fine_tdc #(.SER_W(SER_W), .FINE_W(FINE_W)) u_fine (
    .clk_wr, .rst_n, .word, .hit, .fine);

  event_counter #(.MIN_HIGH(MIN_HIGH), .CNT_W(CNT_W)) u_evcnt (
    .clk_wr, .rst_n, .trig, .clear(cnt_clear), .inc(evt_inc),
    .count(evt_count), .count_next(evt_count_next));

  ts_capture u_cap (
    .clk_wr, .rst_n, .hit, .fine, .coarse, .tai, .pps_cnt, .evt_inc,
    .evt_count, .evt_count_next, .busy, .ts(cap_ts), .ts_load(cap_load),
    .dropped);

  ts_cdc #(.W(TS_W)) u_cdc (
    .clk_src(clk_wr), .rst_src_n(rst_n), .src_load(cap_load),
    .src_data(cap_ts), .src_busy(busy), .clk_dst(clk_sys),
    .rst_dst_n(rst_n), .dst_valid(ts_valid), .dst_data(ts),
    .dst_done(ts_done));

endmodule
