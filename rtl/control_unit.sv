// control_unit: the six-state controller of the MHHEA processor.
//
// States and transitions follow the paper's state diagram:
//   Init      waits for `go` and clears the key address and counters;
//   LMsg      captures the 32-bit plaintext block (one cycle);
//   LKey      writes one key pair per cycle at the incrementing address and
//             leaves when the cache is full (address 15 written);
//   LMsgCache loads the next 16-bit half into the alignment buffer, or, when
//             both halves are done (the end of the block), returns to Init;
//   Circ      rotates the buffer left by the small scrambled key;
//   Encrypt   registers the cipher word, rotates the buffer right by the
//             large key plus one, steps the key address and the hiding
//             vector, and returns to Circ until all 16 bits of the half are
//             hidden, then goes to LMsgCache.
// Each key pair hides n = KN2-KN1+1 bits (1..8) in two cycles whatever n is.
// A 5-bit counter of hidden bits decides when a half is done; `remaining`
// (16 minus that count) lets the encryption module stop at the end of the
// half. The diagram's self-loop on LMsgCache labelled "Not EOF" is not given
// a separate meaning here: the state always moves on after one cycle.
// Outputs are decoded combinationally from the state register.
module control_unit
  import mhhea_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic              go,
  input  logic [ADDR_W-1:0] addr,
  input  key_t              kn_small,
  input  key_t              kn_large,
  output state_t            state,
  output logic              msg_load,
  output logic              key_we,
  output logic              addr_clr,
  output logic              addr_inc,
  output logic              half_sel,
  output logic              align_load,
  output logic              align_rotl,
  output logic              align_rotr,
  output logic              enc_en,
  output logic              rng_step,
  output logic [CNT_W-1:0]  remaining
);

  state_t           state_q, state_d;
  logic [CNT_W-1:0] used_q;      // bits of the current half already hidden
  logic [1:0]       halves_q;    // halves loaded so far in this block
  logic [CNT_W-1:0] n_bits;
  logic             eof;

  assign n_bits = CNT_W'(kn_large) - CNT_W'(kn_small) + CNT_W'(1);
  assign eof    = (halves_q == 2'd2);

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_INIT:      if (go) state_d = S_LMSG;
      S_LMSG:      state_d = S_LKEY;
      S_LKEY:      if (addr == ADDR_W'(NPAIRS - 1)) state_d = S_LMSGCACHE;
      S_LMSGCACHE: state_d = eof ? S_INIT : S_CIRC;
      S_CIRC:      state_d = S_ENCRYPT;
      S_ENCRYPT:   state_d = (used_q + n_bits >= CNT_W'(HALF_W)) ? S_LMSGCACHE : S_CIRC;
      default:     state_d = S_INIT;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q  <= S_INIT;
      used_q   <= '0;
      halves_q <= '0;
    end else begin
      state_q <= state_d;
      unique case (state_q)
        S_INIT:      halves_q <= '0;
        S_LMSGCACHE: if (!eof) begin
                       halves_q <= halves_q + 2'd1;
                       used_q   <= '0;
                     end
        S_ENCRYPT:   used_q <= used_q + n_bits;
        default: ;
      endcase
    end
  end

  assign state      = state_q;
  assign msg_load   = (state_q == S_LMSG);
  assign key_we     = (state_q == S_LKEY);
  assign addr_clr   = (state_q == S_INIT);
  assign addr_inc   = (state_q == S_LKEY) || (state_q == S_ENCRYPT);
  assign half_sel   = halves_q[0];
  assign align_load = (state_q == S_LMSGCACHE) && !eof;
  assign align_rotl = (state_q == S_CIRC);
  assign align_rotr = (state_q == S_ENCRYPT);
  assign enc_en     = (state_q == S_ENCRYPT);
  assign rng_step   = (state_q == S_ENCRYPT);
  assign remaining  = CNT_W'(HALF_W) - used_q;

  // Every Encrypt is preceded by a Circ, so a cipher word is never produced
  // in two consecutive cycles; and a word is only produced while bits of the
  // current half are still unhidden.
  assert property (@(posedge clk) disable iff (rst) enc_en |=> !enc_en);
  assert property (@(posedge clk) disable iff (rst) enc_en |-> used_q < CNT_W'(HALF_W));

endmodule
