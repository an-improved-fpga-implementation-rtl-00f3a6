// address_increment: the 4-bit key-cache address counter.
//
// One counter serves both key loading and encryption: during LKey it steps
// once per loaded pair (0..15), and during encryption it steps once per
// key pair used, wrapping modulo 16 (the algorithm's i := i mod L, L = 16).
// `clr` (Init state) returns it to zero and has priority over `inc`. Using
// one counter for both jobs is this design's reading of the block diagram,
// where a single address counter feeds the key cache.
module address_increment
  import mhhea_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              clr,
  input  logic              inc,
  output logic [ADDR_W-1:0] addr
);

  always_ff @(posedge clk) begin
    if (rst || clr) addr <= '0;
    else if (inc)   addr <= addr + 1'b1;
  end

endmodule
