// coarse_tdc: counts 8 ns ticks of the 125 MHz WR clock since the last PPS.
//
// The counter is zeroed by the WR PPS pulse and otherwise increments on
// every tick, whether or not a trigger was seen, as the paper describes.
// With a 125 MHz clock it reaches 124,999,999 before the next PPS, so 27
// bits suffice; it wraps freely if the PPS is missing. The counter reads 0
// in the cycle after the PPS pulse is sampled (this design's choice).
//
// Interface: clk_wr, rst_n, pps (one-cycle pulse in clk_wr), coarse.
module coarse_tdc #(
  parameter int unsigned COARSE_W = 27
) (
  input  logic                clk_wr,
  input  logic                rst_n,
  input  logic                pps,
  output logic [COARSE_W-1:0] coarse
);

  always_ff @(posedge clk_wr or negedge rst_n)
    if (!rst_n)   coarse <= '0;
    else if (pps) coarse <= '0;
    else          coarse <= coarse + 1'b1;

endmodule
