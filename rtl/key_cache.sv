// key_cache: the 16-pair key store.
//
// The key is a table of 16 pairs of 3-bit integers (32 three-bit registers,
// two per address). As in the paper's schematic the cache is two 8-pair
// banks: address bit 3 chooses the bank for writes (bank write enable) and,
// through a 2:1 multiplexer per key, for reads; bits 2:0 address the pair
// inside the bank. A pair is written on the rising edge when `we` is high
// (one pair per cycle in the LKey state) and read combinationally at `addr`.
module key_cache
  import mhhea_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              we,
  input  logic [ADDR_W-1:0] addr,
  input  key_pair_t         wdata,
  output key_pair_t         rdata
);

  key_pair_t rd_lo, rd_hi;

  key_bank8 u_bank_lo (
    .clk, .rst,
    .we   (we & ~addr[3]),
    .addr (addr[2:0]),
    .wdata,
    .rdata(rd_lo)
  );

  key_bank8 u_bank_hi (
    .clk, .rst,
    .we   (we & addr[3]),
    .addr (addr[2:0]),
    .wdata,
    .rdata(rd_hi)
  );

  assign rdata = addr[3] ? rd_hi : rd_lo;

endmodule
