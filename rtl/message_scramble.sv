// message_scramble: scrambles the aligned message byte with the key.
//
// The algorithm hides V[j] = M[m] XOR K_i1[q] for j = KN1..KN2, where q
// counts 0,1,2,0,1,2,... from KN1 and K_i1 is the smaller original key.
// After alignment the message bit destined for position j is already at bit
// j, so output bit j is aligned[j] XOR k_small[(j-KN1) mod 3]. Bits below
// KN1 are never selected by the encryption module and are passed unchanged.
// The block diagram shows only the 3-bit key entering this block; the lower
// end of the range, needed to start q at zero, is taken from the comparator
// here. Check from the paper: aligned byte 8'h34 with k_small=4, KN1=2
// yields bits 4:2 = 3'b001 (cipher byte 8'h07 over vector byte 8'h03).
module message_scramble
  import mhhea_pkg::*;
(
  input  logic [HIDE_W-1:0] aligned,
  input  key_t              k_small,
  input  key_t              kn_small,
  output logic [HIDE_W-1:0] scrambled
);

  always_comb begin
    for (int j = 0; j < HIDE_W; j++) begin
      logic [1:0] off;
      off = (j >= int'(kn_small)) ? 2'((j - int'(kn_small)) % 3) : 2'd0;
      scrambled[j] = aligned[j] ^ ((j >= int'(kn_small)) ? k_small[off] : 1'b0);
    end
  end

endmodule
