// iserdes_sr: 8-bit input deserializer for the fine TDC.
//
// The trigger input is sampled on every edge of a 1 GHz clock into an
// 8-bit shift register; on every 125 MHz WR-clock edge the register is
// copied out as one word. Both clocks come from the same PLL, with the
// 125 MHz edge coinciding with a 1 GHz edge, so each word holds the eight
// 1 ns samples taken during the previous WR-clock period. Bit SER_W-1 is
// the oldest sample and bit 0 the newest, so reading the word from MSB to
// LSB walks forward in time.
//
// The paper uses the FPGA's I/O SerDes as a shift register at 1 GHz SDR;
// this module writes that shift register in plain logic rather than
// instantiating the vendor primitive.
//
// Interface: clk_fast (1 GHz), clk_wr (125 MHz), rst_n (async, low),
// din (trigger), word (valid from the clk_wr edge on which it is copied).
module iserdes_sr #(
  parameter int unsigned SER_W = 8
) (
  input  logic             clk_fast,
  input  logic             clk_wr,
  input  logic             rst_n,
  input  logic             din,
  output logic [SER_W-1:0] word
);

  logic [SER_W-1:0] sr;

  always_ff @(posedge clk_fast or negedge rst_n)
    if (!rst_n) sr <= '0;
    else        sr <= {sr[SER_W-2:0], din};

  always_ff @(posedge clk_wr or negedge rst_n)
    if (!rst_n) word <= '0;
    else        word <= sr;

endmodule
