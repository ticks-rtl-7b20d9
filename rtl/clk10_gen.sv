// clk10_gen: 10 MHz clock output aligned with the PPS.
//
// A 200 MHz clock (made from the WR 125 MHz clock by a PLL) is divided by
// DIV = 20 with a counter. The counter does not run until the first PPS;
// on that PPS it starts with the output high, so every rising edge of the
// 10 MHz output falls on a 200 MHz edge a multiple of 100 ns after the
// PPS, and since 10^7 periods make one second the alignment holds at
// every later PPS. The PPS sent to the camera is re-timed by the same
// 200 MHz register stage (`pps_out`), so the two outputs leave on the same
// clock edge and their skew is set only by the output routing (the paper
// measures it below 1 ns, Fig. 3 prints -556.2 ps). Division and start at
// the first PPS follow the paper; sampling the PPS directly on the 200 MHz
// clock (both clocks come from the same reference) and re-timing the PPS
// output are this design's choices.
//
// Interface: clk200, rst_n, pps (from the WR domain); clk10, pps_out,
// running. Latency: pps_out and the first clk10 edge rise together, on the
// first 200 MHz edge that samples the PPS high.
module clk10_gen #(
  parameter int unsigned DIV = 20
) (
  input  logic clk200,
  input  logic rst_n,
  input  logic pps,
  output logic clk10,
  output logic pps_out,
  output logic running
);

  localparam int unsigned D_W = $clog2(DIV);

  logic           pps_q;

  assign pps_out = pps_q;
  logic [D_W-1:0] cnt;
  logic [D_W-1:0] cnt_nxt;

  assign cnt_nxt = (cnt == D_W'(DIV - 1)) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk200 or negedge rst_n)
    if (!rst_n) begin
      pps_q   <= 1'b0;
      running <= 1'b0;
      cnt     <= '0;
      clk10   <= 1'b0;
    end else begin
      pps_q <= pps;
      if (!running) begin
        if (pps && !pps_q) begin
          running <= 1'b1;
          cnt     <= '0;
          clk10   <= 1'b1;
        end
      end else begin
        cnt   <= cnt_nxt;
        clk10 <= (cnt_nxt < D_W'(DIV / 2));
      end
    end

endmodule
