// sync_fifo: single-clock FIFO for 96-bit event records.
//
// A DEPTH-entry array with read and write pointers that wrap at DEPTH
// (which need not be a power of two; the paper's FIFO is 40 words deep)
// and an occupancy counter. The head entry is always visible on `dout`
// (first-word fall-through), so a reader takes it and pulses `rd_en`.
// Writes to a full FIFO and reads from an empty one are ignored.
module sync_fifo #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 40
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_en,
  input  logic [WIDTH-1:0]           din,
  input  logic                       rd_en,
  output logic [WIDTH-1:0]           dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned P_W = $clog2(DEPTH);
  localparam int unsigned C_W = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [P_W-1:0]   wp, rp;
  logic             do_wr, do_rd;

  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign do_wr = wr_en && !full;
  assign do_rd = rd_en && !empty;
  assign dout  = mem[rp];

  always_ff @(posedge clk)
    if (do_wr) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == P_W'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == P_W'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + C_W'(do_wr) - C_W'(do_rd);
    end

endmodule
