// ts_cdc: carries a word from one clock domain to another with a flag.
//
// The source loads a word and flips a request toggle; the toggle crosses
// to the destination through two flip-flops, where a difference from the
// acknowledge toggle raises `dst_valid`. The word itself is held stable in
// the source register for the whole exchange, so it is read directly in
// the destination domain. When the destination has finished with the word
// it pulses `dst_done`; the acknowledge toggle returns through two
// flip-flops and `src_busy` falls. A load while busy is ignored. This is
// the paper's "resynchronized with the 62.5 MHz domain ... after which
// the data-ready flag is lowered"; the two-phase handshake is this
// design's choice.
//
// Timing: dst_valid rises 2-3 destination cycles after src_load; src_busy
// falls 2-3 source cycles after dst_done.
module ts_cdc #(
  parameter int unsigned W = 8
) (
  input  logic         clk_src,
  input  logic         rst_src_n,
  input  logic         src_load,
  input  logic [W-1:0] src_data,
  output logic         src_busy,
  input  logic         clk_dst,
  input  logic         rst_dst_n,
  output logic         dst_valid,
  output logic [W-1:0] dst_data,
  input  logic         dst_done
);

  logic [W-1:0] data_q;
  logic         req_t, ack_t;
  logic [1:0]   req_sync, ack_sync;

  // source domain
  always_ff @(posedge clk_src or negedge rst_src_n)
    if (!rst_src_n) begin
      data_q   <= '0;
      req_t    <= 1'b0;
      ack_sync <= '0;
    end else begin
      ack_sync <= {ack_sync[0], ack_t};
      if (src_load && !src_busy) begin
        data_q <= src_data;
        req_t  <= ~req_t;
      end
    end

  assign src_busy = req_t ^ ack_sync[1];

  // destination domain
  always_ff @(posedge clk_dst or negedge rst_dst_n)
    if (!rst_dst_n) begin
      req_sync <= '0;
      ack_t    <= 1'b0;
    end else begin
      req_sync <= {req_sync[0], req_t};
      if (dst_done && dst_valid) ack_t <= req_sync[1];
    end

  assign dst_valid = req_sync[1] ^ ack_t;
  assign dst_data  = data_q;

endmodule
