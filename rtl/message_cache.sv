// message_cache: holds one 32-bit plaintext block.
//
// The block is captured when `load` is high (the LMsg state) and is held
// until the next load. `half_sel` picks the 16-bit half handed to the message
// alignment buffer: 0 gives bits 15:0, 1 gives bits 31:16. The paper loads the
// least significant half first; the two-register split follows the paper,
// the select encoding is this design's choice. The half output is
// combinational from the register.
module message_cache
  import mhhea_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               load,
  input  logic [BLOCK_W-1:0] plaintext,
  input  logic               half_sel,
  output logic [HALF_W-1:0]  half
);

  logic [HALF_W-1:0] lo_q, hi_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      lo_q <= '0;
      hi_q <= '0;
    end else if (load) begin
      lo_q <= plaintext[HALF_W-1:0];
      hi_q <= plaintext[BLOCK_W-1:HALF_W];
    end
  end

  assign half = half_sel ? hi_q : lo_q;

endmodule
