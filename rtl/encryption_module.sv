// encryption_module: parallel bit replacement and cipher output register.
//
// A row of 2:1 multiplexers, one per bit of the hiding vector's lower byte,
// chooses between the vector bit and the scrambled message bit. Bit j takes
// the message when KN1 <= j <= KN2, so the whole range is replaced in one
// cycle whatever its length (the paper's parallel replacement). The upper
// byte of the vector is passed to the cipher word unchanged, as in the
// paper's example (vector 16'hCA06 -> cipher 16'hCA02).
//
// `remaining` is the number of message bits of the current 16-bit half not
// yet hidden. When the range is longer than that, only the first `remaining`
// positions take message bits and the rest keep the vector bits; this is the
// algorithm's "if M[m] /= EOF" guard applied per 16-bit half, which is this
// design's reading of how the hardware ends a half.
//
// Timing: on a rising edge with `en` high (the Encrypt state) the cipher word
// is registered and `ready` goes high for exactly one cycle; `cipher` then
// holds its value until the next `en`. A cipher word is thus produced every
// two cycles (Circ, Encrypt) while encryption runs.
module encryption_module
  import mhhea_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              en,
  input  logic [VEC_W-1:0]  v,
  input  logic [HIDE_W-1:0] scrambled,
  input  key_t              kn_small,
  input  key_t              kn_large,
  input  logic [CNT_W-1:0]  remaining,
  output logic [VEC_W-1:0]  cipher,
  output logic              ready
);

  logic [HIDE_W-1:0] sel, low;

  always_comb begin
    for (int j = 0; j < HIDE_W; j++) begin
      sel[j] = (j >= int'(kn_small)) && (j <= int'(kn_large)) &&
               ((j - int'(kn_small)) < int'(remaining));
      low[j] = sel[j] ? scrambled[j] : v[j];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cipher <= '0;
      ready  <= 1'b0;
    end else begin
      ready <= en;
      if (en) cipher <= {v[VEC_W-1:HIDE_W], low};
    end
  end

endmodule
