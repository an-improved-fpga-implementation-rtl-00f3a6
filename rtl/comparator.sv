// comparator: orders the scrambled key pair.
//
// After scrambling, KN2 = KN1 + d may wrap past 7 and become the smaller
// value; the algorithm then swaps the pair. This combinational comparator
// delivers the smaller scrambled key (left rotation amount, lower end of the
// replaced range) and the larger one (upper end of the range, and, plus one,
// the right rotation amount).
module comparator
  import mhhea_pkg::*;
(
  input  key_t a,
  input  key_t b,
  output key_t small_key,
  output key_t large_key
);

  always_comb begin
    if (a >= b) begin
      small_key = b;
      large_key = a;
    end else begin
      small_key = a;
      large_key = b;
    end
  end

endmodule
