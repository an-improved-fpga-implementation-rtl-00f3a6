// plus_one: the "+1" block between the comparator and message alignment.
//
// The right rotation after encryption is by the large scrambled key plus one,
// which ranges 1..8 and so needs four bits. The block diagram labels this
// path as 3 bits; a 3-bit result would turn a rotation by 8 into a rotation
// by 0, so this design widens it to 4 bits.
module plus_one
  import mhhea_pkg::*;
(
  input  key_t       large_key,
  output logic [3:0] amount
);

  assign amount = {1'b0, large_key} + 4'd1;

endmodule
