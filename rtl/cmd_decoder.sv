// cmd_decoder: interprets control datagrams received over the UDP stack.
//
// Each datagram payload arrives as 16-bit words, the last one flagged.
// The first word is an opcode (see ticks_pkg::cmd_e), the rest its
// arguments, most significant word first:
//   SET_DEST_MAC  3 words   MAC address to which bunches are sent
//   SET_EXT_TRIG  5 words   TAI seconds (40 bits in 3 words, right
//                           aligned) and coarse tick (27 bits in 2 words)
//                           at which the external trigger is emitted
//   RESET         none      hold event and PPS counters at zero
//   GET_READY     none      release them with an external trigger after
//                           the next PPS
// A datagram with an unknown opcode or the wrong length is ignored and
// flagged on `bad_cmd`. The destination IP is the board's own IP with
// its last 10 bits replaced by DEST_IP_LSB, and the destination port is
// the fixed DEST_PORT, as the paper describes; the encoding of the
// commands, the two fixed values and the broadcast default MAC are this
// design's choices.
//
// Interface (clk_sys): rx_valid/rx_data/rx_last in; own_ip in; command
// pulses and configuration registers out (one cycle after the last word).
module cmd_decoder
  import ticks_pkg::*;
#(
  parameter logic [9:0]  DEST_IP_LSB = 10'h0FE,
  parameter logic [15:0] DEST_PORT   = 16'd50000
) (
  input  logic                clk_sys,
  input  logic                rst_n,
  input  logic                rx_valid,
  input  logic [15:0]         rx_data,
  input  logic                rx_last,
  input  logic [31:0]         own_ip,
  output logic [47:0]         dest_mac,
  output logic [31:0]         dest_ip,
  output logic [15:0]         dest_port,
  output logic [TAI_W-1:0]    ext_tai,
  output logic [COARSE_W-1:0] ext_coarse,
  output logic                ext_arm,
  output logic                cmd_reset,
  output logic                cmd_getready,
  output logic                bad_cmd
);

  logic [15:0] opcode;
  logic [2:0]  nwords;        // words received so far, saturating at 7
  logic [79:0] args;          // up to five argument words
  logic [2:0]  n_total;
  logic [79:0] args_now;

  assign dest_ip   = {own_ip[31:10], DEST_IP_LSB};
  assign dest_port = DEST_PORT;

  // count and argument register including the word arriving now
  assign n_total  = (nwords == 3'd7) ? 3'd7 : nwords + 3'd1;
  assign args_now = (nwords == 3'd0) ? args : {args[63:0], rx_data};

  always_ff @(posedge clk_sys or negedge rst_n)
    if (!rst_n) begin
      opcode       <= '0;
      nwords       <= '0;
      args         <= '0;
      dest_mac     <= 48'hFFFF_FFFF_FFFF;
      ext_tai      <= '0;
      ext_coarse   <= '0;
      ext_arm      <= 1'b0;
      cmd_reset    <= 1'b0;
      cmd_getready <= 1'b0;
      bad_cmd      <= 1'b0;
    end else begin
      ext_arm      <= 1'b0;
      cmd_reset    <= 1'b0;
      cmd_getready <= 1'b0;
      bad_cmd      <= 1'b0;
      if (rx_valid) begin
        if (nwords == 3'd0) opcode <= rx_data;
        args   <= args_now;
        nwords <= n_total;
        if (rx_last) begin
          nwords <= '0;
          args   <= '0;
          unique case ((nwords == 3'd0) ? rx_data : opcode)
            CMD_SET_DEST_MAC:
              if (n_total == 3'd4) dest_mac <= args_now[47:0];
              else bad_cmd <= 1'b1;
            CMD_SET_EXT_TRIG:
              if (n_total == 3'd6) begin
                ext_tai    <= args_now[32 +: TAI_W];
                ext_coarse <= args_now[COARSE_W-1:0];
                ext_arm    <= 1'b1;
              end else bad_cmd <= 1'b1;
            CMD_RESET:
              if (n_total == 3'd1) cmd_reset <= 1'b1;
              else bad_cmd <= 1'b1;
            CMD_GET_READY:
              if (n_total == 3'd1) cmd_getready <= 1'b1;
              else bad_cmd <= 1'b1;
            default: bad_cmd <= 1'b1;
          endcase
        end
      end
    end

endmodule
