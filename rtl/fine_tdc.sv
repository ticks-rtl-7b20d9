// fine_tdc: finds a rising front in the deserialized trigger samples.
//
// Each WR-clock tick the SerDes word (MSB oldest) is scanned from MSB to
// LSB for the first 0->1 transition; the sample before the MSB is the
// newest sample of the previous word, so a front that falls exactly on
// the word boundary is not lost. When a front is found, `hit` is raised
// for one cycle and `fine` gives its position: k = 0 for the MSB sample,
// i.e. the number of nanoseconds between the start of the sampled period
// and the front. The scan and the flag follow the paper; carrying the
// last sample across words and the one-cycle output register are this
// design's choices.
//
// Interface: clk_wr, rst_n, word (SER_W samples), hit, fine. Latency:
// hit/fine are registered, one cycle after the word.
module fine_tdc #(
  parameter int unsigned SER_W  = 8,
  parameter int unsigned FINE_W = $clog2(SER_W)
) (
  input  logic              clk_wr,
  input  logic              rst_n,
  input  logic [SER_W-1:0]  word,
  output logic              hit,
  output logic [FINE_W-1:0] fine
);

  logic              last_q;     // newest sample of the previous word
  logic              hit_d;
  logic [FINE_W-1:0] fine_d;
  logic [SER_W:0]    s;          // s[SER_W] = previous sample, then MSB..LSB

  always_comb begin
    s      = {last_q, word};
    hit_d  = 1'b0;
    fine_d = '0;
    for (int k = 0; k < SER_W; k++) begin
      // sample k (from MSB) is s[SER_W-1-k]; the one before it s[SER_W-k]
      if (!hit_d && !s[SER_W-k] && s[SER_W-1-k]) begin
        hit_d  = 1'b1;
        fine_d = FINE_W'(k);
      end
    end
  end

  always_ff @(posedge clk_wr or negedge rst_n)
    if (!rst_n) begin
      last_q <= 1'b0;
      hit    <= 1'b0;
      fine   <= '0;
    end else begin
      last_q <= word[0];
      hit    <= hit_d;
      fine   <= fine_d;
    end

endmodule
