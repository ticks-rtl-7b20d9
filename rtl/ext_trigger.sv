// ext_trigger: external trigger output to the camera.
//
// A command loads a target time (TAI seconds and 8 ns coarse tick) and
// arms the unit; when the WR time reaches it, a pulse of PULSE_CYC WR
// cycles is sent and the unit disarms. The trigger is therefore always
// aligned to the 8 ns WR clock, as in the paper. The same output also
// carries the "get-ready" trigger requested by the counter state machine
// after a PPS. The output is registered: it rises on the clock edge that
// ends the matching tick. Pulse length and one-shot arming are this
// design's choices.
//
// Interface (clk_wr): tai, coarse (current time); arm with tgt_tai and
// tgt_coarse (stable while armed); sync_trig; ext_trig, armed.
module ext_trigger
  import ticks_pkg::*;
#(
  parameter int unsigned PULSE_CYC = 4
) (
  input  logic                clk_wr,
  input  logic                rst_n,
  input  logic [TAI_W-1:0]    tai,
  input  logic [COARSE_W-1:0] coarse,
  input  logic                arm,
  input  logic [TAI_W-1:0]    tgt_tai,
  input  logic [COARSE_W-1:0] tgt_coarse,
  input  logic                sync_trig,
  output logic                ext_trig,
  output logic                armed
);

  localparam int unsigned P_W = $clog2(PULSE_CYC + 1);

  logic           match;
  logic [P_W-1:0] len;

  assign match    = armed && (tai == tgt_tai) && (coarse == tgt_coarse);
  assign ext_trig = (len != '0);

  always_ff @(posedge clk_wr or negedge rst_n)
    if (!rst_n) begin
      armed <= 1'b0;
      len   <= '0;
    end else begin
      if (arm)        armed <= 1'b1;
      else if (match) armed <= 1'b0;
      if (match || sync_trig) len <= P_W'(PULSE_CYC);
      else if (len != '0)     len <= len - 1'b1;
    end

endmodule
