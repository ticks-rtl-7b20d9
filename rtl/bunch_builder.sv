// bunch_builder: groups events into bunches in two ping-pong FIFOs.
//
// Events from the read-out and busy channels are packed into 96-bit
// records and written into one of two FIFOs (the "filling" FIFO); the
// read-out channel wins when both offer an event in the same cycle. A
// bunch is closed when the filling FIFO holds BUNCH_EVENTS (20) events, or
// when BUNCH_TIMEOUT cycles (200 ms at 62.5 MHz) have passed since the
// last closure and it holds at least one event. At closure the tailer is
// formed from the last event written (full TAI seconds, coarse and fine
// time, full counters) and the number of events, and the multiplexer
// swaps: new events go to the other FIFO while the closed one is read
// out by the packet sender, which pulses `bunch_done` when finished.
// This ping-pong switching hides the six cycles per event that reading a
// record out as 16-bit words costs. If the other FIFO is still being sent
// when 20 events are reached, filling continues (up to DEPTH = 40) and
// the bunch closes as soon as the other FIFO is free; an event that
// finds the filling FIFO full is dropped and reported on `lost`.
//
// The 20-event / 200 ms rule, the tailer, the FIFO size and the two-FIFO
// multiplexer follow the paper. Channel priority, the handling of a
// time-out with no events (timer restarts, nothing is sent) and the
// overflow rule are this design's choices.
//
// Interface (clk_sys): ev0/ev1 valid-ready inputs; closed bunch side:
// bunch_valid, bunch_nev, bunch_tailer, rd_en, rd_data, bunch_done.
// Monitors: lost, close_full, close_timeout (one-cycle pulses).
module bunch_builder
  import ticks_pkg::*;
#(
  parameter int unsigned BUNCH_EVENTS  = 20,
  parameter int unsigned BUNCH_TIMEOUT = 12_500_000,
  parameter int unsigned DEPTH         = 40
) (
  input  logic                clk_sys,
  input  logic                rst_n,
  input  logic                ev0_valid,
  input  event_t              ev0,
  output logic                ev0_ready,
  input  logic                ev1_valid,
  input  event_t              ev1,
  output logic                ev1_ready,
  output logic                bunch_valid,
  output logic [NEV_W-1:0]    bunch_nev,
  output logic [TAILER_W-1:0] bunch_tailer,
  input  logic                rd_en,
  output logic [REC_W-1:0]    rd_data,
  input  logic                bunch_done,
  output logic                lost,
  output logic                close_full,
  output logic                close_timeout
);

  localparam int unsigned C_W = $clog2(DEPTH + 1);
  localparam int unsigned T_W = $clog2(BUNCH_TIMEOUT + 1);

  logic                fill_sel;       // FIFO being filled
  logic [1:0]          closed;         // FIFO holds a closed bunch
  logic [TAILER_W-1:0] tailer_q [2];
  logic [NEV_W-1:0]    nev_q    [2];
  event_t              last_ev;
  logic [T_W-1:0]      timer;

  logic [1:0]          f_wr, f_rd, f_empty, f_full;
  logic [REC_W-1:0]    f_dout [2];
  logic [C_W-1:0]      f_count [2];

  logic                tmo, want_close, do_close;
  logic                take0, take1;
  event_t              wr_ev;
  logic [C_W-1:0]      fill_cnt;

  assign fill_cnt   = f_count[fill_sel];
  assign tmo        = (timer == T_W'(BUNCH_TIMEOUT - 1));
  assign want_close = (fill_cnt >= C_W'(BUNCH_EVENTS)) || (tmo && fill_cnt != '0);
  assign do_close   = want_close && !closed[~fill_sel];

  // no write in a closing cycle, so the tailer and count are exact
  assign ev0_ready = !do_close;
  assign ev1_ready = !do_close && !ev0_valid;
  assign take0     = ev0_valid && ev0_ready;
  assign take1     = ev1_valid && ev1_ready;
  assign wr_ev     = take0 ? ev0 : ev1;
  assign lost      = (take0 || take1) && f_full[fill_sel];

  for (genvar i = 0; i < 2; i++) begin : g_fifo
    assign f_wr[i] = (take0 || take1) && (fill_sel == 1'(i)) && !f_full[i];
    assign f_rd[i] = rd_en && (fill_sel != 1'(i)) && closed[i];
    sync_fifo #(.WIDTH(REC_W), .DEPTH(DEPTH)) u_fifo (
      .clk(clk_sys), .rst_n, .wr_en(f_wr[i]), .din(pack_record(wr_ev)),
      .rd_en(f_rd[i]), .dout(f_dout[i]), .empty(f_empty[i]),
      .full(f_full[i]), .count(f_count[i]));
  end

  assign bunch_valid  = closed[~fill_sel];
  assign bunch_nev    = nev_q[~fill_sel];
  assign bunch_tailer = tailer_q[~fill_sel];
  assign rd_data      = f_dout[~fill_sel];

  assign close_full    = do_close && (fill_cnt >= C_W'(BUNCH_EVENTS));
  assign close_timeout = do_close && !(fill_cnt >= C_W'(BUNCH_EVENTS));

  always_ff @(posedge clk_sys or negedge rst_n)
    if (!rst_n) begin
      fill_sel <= 1'b0;
      closed   <= '0;
      tailer_q <= '{default: '0};
      nev_q    <= '{default: '0};
      last_ev  <= '0;
      timer    <= '0;
    end else begin
      if (f_wr[fill_sel]) last_ev <= wr_ev;
      if (do_close || tmo) timer <= '0;
      else                 timer <= timer + 1'b1;
      if (do_close) begin
        closed[fill_sel]   <= 1'b1;
        nev_q[fill_sel]    <= NEV_W'(fill_cnt);
        tailer_q[fill_sel] <= pack_tailer(last_ev, NEV_W'(fill_cnt));
        fill_sel           <= ~fill_sel;
      end
      if (bunch_done) closed[~fill_sel] <= 1'b0;
    end

endmodule
