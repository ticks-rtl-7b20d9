// spi_rx: SPI slave receiving the camera's 16-bit event-type word.
//
// The camera sends, after each trigger, a 16-bit word over SPI at up to
// 50 MHz (about 320 ns per word). Bits are shifted in on the rising edge
// of SCK while CS_N is low, most significant bit first (SPI mode 0); a
// high CS_N clears the bit counter, so a broken word is discarded. After
// the 16th bit the word is stored and a toggle flips; the toggle is
// synchronized to the 62.5 MHz system clock, where a one-cycle `valid`
// is raised with the word on `data`. The paper uses an existing SPI core
// for this; this module is a minimal replacement, and the SPI mode, bit
// order and word framing are this design's choices.
//
// Interface: sck, cs_n, mosi (from the camera); clk_sys, rst_n; valid,
// data. Latency: valid 3-4 clk_sys cycles after the 16th SCK edge.
module spi_rx #(
  parameter int unsigned SPI_W = 16
) (
  input  logic             rst_n,
  input  logic             sck,
  input  logic             cs_n,
  input  logic             mosi,
  input  logic             clk_sys,
  output logic             valid,
  output logic [SPI_W-1:0] data
);

  localparam int unsigned BC_W = $clog2(SPI_W);

  logic             clr;        // asynchronous clear of the bit counter
  logic [BC_W-1:0]  bitcnt;
  logic [SPI_W-2:0] sr;
  logic [SPI_W-1:0] word_q;
  logic             tog;
  logic [2:0]       sync_q;

  assign clr = cs_n | ~rst_n;

  always_ff @(posedge sck or posedge clr)
    if (clr) begin
      bitcnt <= '0;
      sr     <= '0;
    end else begin
      sr     <= {sr[SPI_W-3:0], mosi};
      bitcnt <= (bitcnt == BC_W'(SPI_W - 1)) ? '0 : bitcnt + 1'b1;
    end

  always_ff @(posedge sck or negedge rst_n)
    if (!rst_n) begin
      word_q <= '0;
      tog    <= 1'b0;
    end else if (!cs_n && bitcnt == BC_W'(SPI_W - 1)) begin
      word_q <= {sr, mosi};
      tog    <= ~tog;
    end

  always_ff @(posedge clk_sys or negedge rst_n)
    if (!rst_n) begin
      sync_q <= '0;
      valid  <= 1'b0;
      data   <= '0;
    end else begin
      sync_q <= {sync_q[1:0], tog};
      valid  <= sync_q[2] ^ sync_q[1];
      if (sync_q[2] ^ sync_q[1]) data <= word_q;
    end

endmodule
