// random_number_generator: the 16-bit hiding-vector generator.
//
// A Fibonacci linear feedback shift register with the primitive polynomial
// x^16 + x^14 + x^13 + x^11 + 1, so it runs through all 65535 nonzero states.
// The paper asks for an LFSR with a primitive polynomial; the particular
// polynomial and the seed are this design's choice. The register shifts
// left by one bit on each rising edge with `step` high (once per key pair,
// so the vector is stable through the Circ and Encrypt cycles that use it),
// and is set to SEED by `rst`. SEED must be nonzero.
module random_number_generator
  import mhhea_pkg::*;
#(
  parameter logic [VEC_W-1:0] SEED = 16'hACE1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             step,
  output logic [VEC_W-1:0] v
);

  logic fb;
  assign fb = v[15] ^ v[13] ^ v[12] ^ v[10];

  always_ff @(posedge clk) begin
    if (rst)       v <= SEED;
    else if (step) v <= {v[VEC_W-2:0], fb};
  end

endmodule
