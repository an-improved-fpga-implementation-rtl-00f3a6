// key_bank8: eight key pairs, one half of the key cache.
//
// Sixteen 3-bit registers arranged as eight pairs; both registers of a pair
// share one address, so a whole pair is written in one cycle when `we` is
// high and read combinationally at the same address. This mirrors the
// "Key Cache 8 Pairs" symbol of the paper's key-cache schematic; the
// register reset to zero is this design's choice.
module key_bank8
  import mhhea_pkg::*;
(
  input  logic      clk,
  input  logic      rst,
  input  logic      we,
  input  logic [2:0] addr,
  input  key_pair_t wdata,
  output key_pair_t rdata
);

  key_pair_t regs_q [8];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < 8; i++) regs_q[i] <= '0;
    end else if (we) begin
      regs_q[addr] <= wdata;
    end
  end

  assign rdata = regs_q[addr];

endmodule
