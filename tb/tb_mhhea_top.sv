// tb_mhhea_top: end-to-end test of the MHHEA processor at its default size.
//
// Encrypts several 32-bit blocks, the first being the plaintext 32'hABCD1234
// with a key table whose first six pairs are (0,3) (1,4) (4,0) (0,4) (3,0)
// (6,4) and whose other pairs are random. Every cipher word is compared with
// a behavioural model of the algorithm written from its pseudo-code (bit
// loop over j = KN1..KN2, full-width slice of the vector taken mod 8) and
// driven by its own copy of the LFSR. Each block is also decrypted from the
// cipher words alone (the upper byte of each word is the vector byte that
// scrambled the locations) and must give back the plaintext. Cycle counts
// are checked: one cipher word every two cycles inside a half, and the whole
// block in 1 + 16 + (1 + 2*words) per half + 1 cycles after `go`.
// Mechanisms counted, each of which must occur: waiting in Init for `go`,
// swap of the original pair, wrap-around swap of the scrambled pair, a pair
// cut short at the end of a half, a range of the full 8 bits, and a key
// address wrapping past 15 within a block.
module tb_mhhea_top;
  import mhhea_pkg::*;

  localparam int NBLOCKS = 6;

  logic               clk = 1'b0;
  logic               rst, go;
  logic [BLOCK_W-1:0] plaintext;
  key_pair_t          key;
  logic               idle, key_load, ready;
  logic [ADDR_W-1:0]  key_addr;
  logic [VEC_W-1:0]   cipher;

  mhhea_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_go_wait = 0, n_orig_swap = 0, n_scr_swap = 0, n_trunc = 0, n_full8 = 0, n_addr_wrap = 0;

  key_pair_t keys [NPAIRS];
  logic [15:0] model_v = 16'hACE1;   // reference LFSR, same seed as the design

  function automatic logic [15:0] lfsr_next(logic [15:0] s);
    return {s[14:0], s[15] ^ s[13] ^ s[12] ^ s[10]};
  endfunction

  // Scrambled locations of a key pair for a given vector upper byte.
  task automatic locations(input key_pair_t kp, input logic [7:0] vhi,
                           output int kn1, output int kn2, output int klo,
                           input bit count);
    int khi, slice, t;
    klo = int'(kp.left); khi = int'(kp.right);
    if (klo >= khi) begin t = klo; klo = khi; khi = t; if (count && kp.left != kp.right) n_orig_swap++; end
    slice = 0;
    for (int b = khi; b >= klo; b--) slice = (slice << 1) | int'(vhi[b]);
    kn1 = (slice ^ klo) % 8;
    kn2 = (kn1 + (khi - klo)) % 8;
    if (kn1 >= kn2) begin t = kn1; kn1 = kn2; kn2 = t; if (count && kn1 != kn2) n_scr_swap++; end
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Watchdog.
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] pt, recovered;
    rst = 1'b1; go = 1'b0; plaintext = '0; key = '0;
    repeat (3) @(posedge clk);
    rst = 1'b0;

    for (int blk = 0; blk < NBLOCKS; blk++) begin
      int cyc_start, cycles, words, ready_gap, last_ready, kidx;
      int expected_cycles;
      // key table
      for (int p = 0; p < NPAIRS; p++) begin
        keys[p].left  = key_t'($urandom_range(0, 7));
        keys[p].right = key_t'($urandom_range(0, 7));
      end
      if (blk == 0) begin
        keys[0] = '{3'd0, 3'd3}; keys[1] = '{3'd1, 3'd4}; keys[2] = '{3'd4, 3'd0};
        keys[3] = '{3'd0, 3'd4}; keys[4] = '{3'd3, 3'd0}; keys[5] = '{3'd6, 3'd4};
        pt = 32'hABCD1234;
      end else if (blk == 1) begin
        // long ranges so the key address wraps past 15 within one block
        for (int p = 0; p < NPAIRS; p++) keys[p] = '{3'd0, 3'd0};
        pt = $urandom;
      end else begin
        pt = $urandom;
      end

      // Init must hold until go
      @(negedge clk);
      check(idle, "idle before go");
      repeat (2) begin
        @(negedge clk);
        if (idle) n_go_wait++;
      end
      plaintext = pt;
      go = 1'b1;
      @(negedge clk);
      go = 1'b0;
      cyc_start = 0;
      // LMsg cycle now; key loading follows
      @(negedge clk);
      for (int p = 0; p < NPAIRS; p++) begin
        check(key_load && key_addr == ADDR_W'(p), $sformatf("key load slot %0d", p));
        key = keys[p];
        @(negedge clk);
      end
      key = '0;
      plaintext = '0;   // must already have been captured

      // Encryption: model and collect
      recovered = '0;
      words = 0;
      kidx = 0;
      cycles = 18;
      expected_cycles = 1 + 16 + 1;
      for (int h = 0; h < 2; h++) begin
        int idx, dpos;
        logic [15:0] half_bits;
        half_bits = (h == 0) ? pt[15:0] : pt[31:16];
        idx = 0;
        dpos = 0;
        expected_cycles += 1;
        last_ready = -1;
        while (idx < 16) begin
          int kn1, kn2, klo, q, waited;
          logic [15:0] exp_c;
          int dkn1, dkn2, dklo;
          locations(keys[kidx], model_v[15:8], kn1, kn2, klo, 1'b1);
          if (kn2 - kn1 + 1 == 8) n_full8++;
          if (idx + kn2 - kn1 + 1 > 16) n_trunc++;
          exp_c = model_v;
          q = 0;
          for (int j = kn1; j <= kn2; j++) begin
            q = q % 3;
            if (idx < 16) begin
              exp_c[j] = half_bits[idx] ^ klo[q];
              idx++;
            end
            q++;
          end
          // wait for ready
          waited = 0;
          while (!ready && waited < 10) begin @(negedge clk); cycles++; waited++; end
          check(ready, "ready seen");
          check(cipher == exp_c, $sformatf("blk %0d half %0d word %0d: cipher %h expected %h",
                                           blk, h, words, cipher, exp_c));
          // decrypt from the cipher word alone
          locations(keys[kidx], cipher[15:8], dkn1, dkn2, dklo, 1'b0);
          q = 0;
          for (int j = dkn1; j <= dkn2; j++) begin
            q = q % 3;
            if (dpos < 16) begin
              recovered[16*h + dpos] = cipher[j] ^ dklo[q];
              dpos++;
            end
            q++;
          end
          if (last_ready >= 0) check(cycles - last_ready == 2, "one word every two cycles");
          last_ready = cycles;
          expected_cycles += 2;
          words++;
          kidx = (kidx + 1) % NPAIRS;
          if (kidx == 0) n_addr_wrap++;
          model_v = lfsr_next(model_v);
          @(negedge clk); cycles++;
        end
      end
      // back to Init after the last LMsgCache
      begin
        automatic int waited = 0;
        while (!idle && waited < 10) begin @(negedge clk); cycles++; waited++; end
      end
      check(idle, "returned to idle");
      check(cycles == expected_cycles + 1, $sformatf("block cycles %0d expected %0d", cycles, expected_cycles + 1));
      check(recovered == pt, $sformatf("decrypted %h expected %h", recovered, pt));
    end

    $display("mechanisms: go_wait=%0d orig_swap=%0d scr_swap=%0d trunc=%0d full8=%0d addr_wrap=%0d",
             n_go_wait, n_orig_swap, n_scr_swap, n_trunc, n_full8, n_addr_wrap);
    check(n_go_wait > 0, "Init waited for go");
    check(n_orig_swap > 0, "original pair swapped");
    check(n_scr_swap > 0, "scrambled pair swapped");
    check(n_trunc > 0, "pair cut at end of half");
    check(n_full8 > 0, "full 8-bit range");
    check(n_addr_wrap > 0, "key address wrapped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
