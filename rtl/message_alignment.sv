// message_alignment: the 16-bit message buffer and its one-cycle rotator.
//
// The connection between message and hiding vector is fixed: bit j of the
// buffer can only ever replace bit j of the vector. To hide the next unused
// message bits (always kept at the least significant end of the buffer) at
// positions KN1..KN2, the buffer is first rotated left by KN1 (Circ state),
// so that the unused bits sit at KN1 upwards, and after encryption rotated
// right by KN2+1 (end of the Encrypt state). The net effect is a right
// rotation by the number of bits just consumed, so the next unused bit is
// again at bit 0. Both rotations are multiplexer barrel rotators and take one
// clock cycle, as in the paper.
//
// Interface: `load` captures `din` (LMsgCache state), `rotl` rotates left by
// `rotl_amt` (0..7), `rotr` rotates right by `rotr_amt` (1..8). Priority is
// load, then rotl, then rotr. `buffer` is the register; its low byte is the
// part that can be hidden. Rotation direction follows the paper's
// worked example: 16'h48D0 rotated left by two gives 16'h2341.
module message_alignment
  import mhhea_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              load,
  input  logic [HALF_W-1:0] din,
  input  logic              rotl,
  input  key_t              rotl_amt,
  input  logic              rotr,
  input  logic [3:0]        rotr_amt,
  output logic [HALF_W-1:0] buffer
);

  logic [HALF_W-1:0] buf_q, rotl_val, rotr_val;

  // Multiplexer rotators: a doubled word shifted by the amount.
  always_comb begin
    logic [2*HALF_W-1:0] dbl;
    logic [4:0]          lidx, ridx;
    dbl      = {buf_q, buf_q};
    lidx     = 5'(2*HALF_W-1) - {2'b00, rotl_amt};
    ridx     = {1'b0, rotr_amt};
    rotl_val = dbl[lidx -: HALF_W];
    rotr_val = dbl[ridx +: HALF_W];
  end

  always_ff @(posedge clk) begin
    if (rst)       buf_q <= '0;
    else if (load) buf_q <= din;
    else if (rotl) buf_q <= rotl_val;
    else if (rotr) buf_q <= rotr_val;
  end

  assign buffer = buf_q;

  // The controller asks for at most one buffer operation per cycle.
  assert property (@(posedge clk) disable iff (rst) $onehot0({load, rotl, rotr}));

endmodule
