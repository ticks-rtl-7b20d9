// packet_tx: streams a closed bunch to the UDP stack as 16-bit words.
//
// For each of the bunch's events the 96-bit record at the head of the
// closed FIFO is sent as six 16-bit words, most significant first (six
// cycles per event, as in the paper), and the record is popped with the
// sixth word. The 160-bit tailer follows as ten words, the last one
// flagged with `tx_last`; the datagram payload is therefore
// 12 x events + 20 bytes (260 bytes for a full bunch of 20), and `tx_len`
// gives it for the whole packet. `bunch_done` then frees the FIFO. The
// stream uses a valid/ready handshake (this design's choice; the UDP
// stack's own interface is not described).
//
// Interface (clk_sys): bunch_valid/bunch_nev/bunch_tailer/rd_data/rd_en/
// bunch_done to the bunch builder; tx_valid/tx_ready/tx_data/tx_last/
// tx_len to the UDP stack.
module packet_tx
  import ticks_pkg::*;
(
  input  logic                clk_sys,
  input  logic                rst_n,
  input  logic                bunch_valid,
  input  logic [NEV_W-1:0]    bunch_nev,
  input  logic [TAILER_W-1:0] bunch_tailer,
  input  logic [REC_W-1:0]    rd_data,
  output logic                rd_en,
  output logic                bunch_done,
  output logic                tx_valid,
  input  logic                tx_ready,
  output logic [15:0]         tx_data,
  output logic                tx_last,
  output logic [15:0]         tx_len
);

  localparam int unsigned REC_WORDS = REC_W / 16;     // 6
  localparam int unsigned TL_WORDS  = TAILER_W / 16;  // 10

  typedef enum logic [1:0] {IDLE, EVENTS, TAILER, DONE} state_e;

  state_e           state;
  logic [NEV_W-1:0] ev_left;
  logic [3:0]       widx;
  logic             fire;

  assign fire     = tx_valid && tx_ready;
  assign tx_valid = (state == EVENTS) || (state == TAILER);
  assign tx_last  = (state == TAILER) && (widx == 4'(TL_WORDS - 1));
  assign rd_en    = (state == EVENTS) && fire && (widx == 4'(REC_WORDS - 1));
  assign bunch_done = (state == DONE);

  always_comb begin
    tx_data = '0;
    if (state == EVENTS)
      tx_data = rd_data[REC_W-1-16*widx -: 16];
    else if (state == TAILER)
      tx_data = bunch_tailer[TAILER_W-1-16*widx -: 16];
  end

  always_ff @(posedge clk_sys or negedge rst_n)
    if (!rst_n) begin
      state   <= IDLE;
      ev_left <= '0;
      widx    <= '0;
      tx_len  <= '0;
    end else begin
      unique case (state)
        IDLE: if (bunch_valid) begin
          ev_left <= bunch_nev;
          widx    <= '0;
          tx_len  <= 16'(bunch_nev) * 16'd12 + 16'd20;
          state   <= (bunch_nev == '0) ? TAILER : EVENTS;
        end
        EVENTS: if (fire) begin
          if (widx == 4'(REC_WORDS - 1)) begin
            widx    <= '0;
            ev_left <= ev_left - 1'b1;
            if (ev_left == NEV_W'(1)) state <= TAILER;
          end else widx <= widx + 1'b1;
        end
        TAILER: if (fire) begin
          if (tx_last) state <= DONE;
          else         widx  <= widx + 1'b1;
        end
        DONE: state <= IDLE;   // bunch_done pulses here
        default: state <= IDLE;
      endcase
    end

endmodule
