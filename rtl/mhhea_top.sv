// mhhea_top: the MHHEA encryption processor.
//
// Hides a 32-bit plaintext block inside a stream of 16-bit hiding vectors
// under the control of a 16-pair key, wired as in the paper's block diagram:
//   message cache -> message alignment -> message scramble -> encryption
//   key cache -> key scramble -> comparator -> (+1) -> message alignment
//   random number generator -> key scramble (upper byte) and encryption
//   address increment -> key cache; control unit sequences everything.
//
// Operation: pulse or hold `go` while idle (`idle` high). The next cycle
// captures `plaintext` (LMsg). Then for 16 cycles `key_load` is high and the
// pair on `key` is written at address `key_addr` (0..15, one per cycle). The
// processor then encrypts the low half of the block and afterwards the high
// half. Each key pair in turn (address modulo 16, continuing across halves)
// hides 1..8 message bits in one 16-bit cipher word: two cycles per word,
// with `ready` high for one cycle when `cipher` holds a new word. After both
// halves it returns to idle; the next block needs `go` and a key load again.
// The hiding vector generator runs on across blocks and is reset only by
// `rst` (synchronous, active high).
module mhhea_top
  import mhhea_pkg::*;
#(
  parameter logic [VEC_W-1:0] SEED = 16'hACE1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               go,
  input  logic [BLOCK_W-1:0] plaintext,
  input  key_pair_t          key,
  output logic               idle,
  output logic               key_load,
  output logic [ADDR_W-1:0]  key_addr,
  output logic [VEC_W-1:0]   cipher,
  output logic               ready
);

  state_t            state;
  logic              msg_load, key_we, addr_clr, addr_inc, half_sel;
  logic              align_load, align_rotl, align_rotr, enc_en, rng_step;
  logic [CNT_W-1:0]  remaining;
  logic [ADDR_W-1:0] addr;
  logic [HALF_W-1:0] half, buffer;
  logic [HIDE_W-1:0] aligned, scrambled;
  logic [VEC_W-1:0]  v;
  key_pair_t         pair;
  key_t              kn1, kn2, k_small, kn_small, kn_large;
  logic [3:0]        rotr_amt;

  control_unit u_ctrl (
    .clk, .rst, .go,
    .addr, .kn_small, .kn_large,
    .state, .msg_load, .key_we, .addr_clr, .addr_inc, .half_sel,
    .align_load, .align_rotl, .align_rotr, .enc_en, .rng_step, .remaining
  );

  address_increment u_addr (
    .clk, .rst, .clr(addr_clr), .inc(addr_inc), .addr
  );

  message_cache u_mcache (
    .clk, .rst, .load(msg_load), .plaintext, .half_sel, .half
  );

  key_cache u_kcache (
    .clk, .rst, .we(key_we), .addr, .wdata(key), .rdata(pair)
  );

  random_number_generator #(.SEED(SEED)) u_rng (
    .clk, .rst, .step(rng_step), .v
  );

  key_scramble u_kscr (
    .pair, .v_hi(v[VEC_W-1:HIDE_W]), .kn1, .kn2, .k_small
  );

  comparator u_cmp (
    .a(kn1), .b(kn2), .small_key(kn_small), .large_key(kn_large)
  );

  plus_one u_inc (
    .large_key(kn_large), .amount(rotr_amt)
  );

  message_alignment u_align (
    .clk, .rst,
    .load(align_load), .din(half),
    .rotl(align_rotl), .rotl_amt(kn_small),
    .rotr(align_rotr), .rotr_amt,
    .buffer
  );

  message_scramble u_mscr (
    .aligned, .k_small, .kn_small, .scrambled
  );

  encryption_module u_enc (
    .clk, .rst, .en(enc_en), .v, .scrambled,
    .kn_small, .kn_large, .remaining, .cipher, .ready
  );

  assign aligned  = buffer[HIDE_W-1:0];
  assign idle     = (state == S_INIT);
  assign key_load = key_we;
  assign key_addr = addr;

  // A cipher word is announced only after an Encrypt cycle.
  assert property (@(posedge clk) disable iff (rst) ready |-> $past(state) == S_ENCRYPT);

endmodule
