// pulse_sync: moves single-cycle pulses between clock domains.
//
// Each source pulse flips a toggle register; the toggle crosses through
// two flip-flops and a change is turned back into one destination pulse.
// Pulses must be spaced by a few destination cycles, which holds for the
// rare control commands it carries.
module pulse_sync (
  input  logic clk_src,
  input  logic rst_src_n,
  input  logic src_pulse,
  input  logic clk_dst,
  input  logic rst_dst_n,
  output logic dst_pulse
);

  logic       tog;
  logic [2:0] sync_q;

  always_ff @(posedge clk_src or negedge rst_src_n)
    if (!rst_src_n)     tog <= 1'b0;
    else if (src_pulse) tog <= ~tog;

  always_ff @(posedge clk_dst or negedge rst_dst_n)
    if (!rst_dst_n) sync_q <= '0;
    else            sync_q <= {sync_q[1:0], tog};

  assign dst_pulse = sync_q[2] ^ sync_q[1];

endmodule
