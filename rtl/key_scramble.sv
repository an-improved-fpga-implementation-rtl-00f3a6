// key_scramble: scrambles the hiding locations of one key pair.
//
// Implements the location part of the algorithm, combinationally:
//   order the pair so that k_lo <= k_hi (K_i1, K_i2);
//   KN1 = V[k_hi+8 downto k_lo+8] XOR k_lo, kept to 3 bits (mod 8);
//   KN2 = KN1 + (k_hi - k_lo) mod 8.
// The slice of the hiding vector's upper byte is k_hi-k_lo+1 bits wide; only
// its three low bits survive the mod 8, so the module takes the upper byte
// shifted right by k_lo and masks it to min(3, width) bits. Worked values from
// the paper: pair (0,3) with V[15:8]=8'hCA gives KN1=2, KN2=5; pair (4,6) with
// V[15:8]=8'hE5 gives KN1=2, KN2=4. `k_small` is the smaller original key,
// which the message scramble uses. The block diagram labels the vector input
// to this block as 3 bits; this design takes the whole upper byte and does
// the slice selection here.
module key_scramble
  import mhhea_pkg::*;
(
  input  key_pair_t         pair,
  input  logic [HIDE_W-1:0] v_hi,
  output key_t              kn1,
  output key_t              kn2,
  output key_t              k_small
);

  always_comb begin
    key_t        k_lo, k_hi, diff, mask;
    key_t        sh;   // only the 3 low bits of the slice survive mod 8
    if (pair.left >= pair.right) begin
      k_lo = pair.right;
      k_hi = pair.left;
    end else begin
      k_lo = pair.left;
      k_hi = pair.right;
    end
    diff = k_hi - k_lo;
    mask = (diff >= 3'd2) ? 3'b111 : (diff == 3'd1) ? 3'b011 : 3'b001;
    sh   = KEY_W'(v_hi >> k_lo);
    kn1  = (sh & mask) ^ k_lo;
    kn2  = kn1 + diff;
    k_small = k_lo;
  end

endmodule
