// tb_control_unit: drives the controller with a key address counter and
// random scrambled key pairs, and checks the state sequence of the paper's
// state diagram: Init holds without `go`; LMsg for one cycle; LKey until
// address 15 is written; per half one LMsgCache cycle followed by
// Circ/Encrypt pairs until 16 bits are hidden; a final LMsgCache returns to
// Init. Also checks the decoded strobes and the `remaining` count.
module tb_control_unit;
  import mhhea_pkg::*;
  logic clk = 1'b0, rst, go;
  logic [3:0] addr;
  key_t kn_small, kn_large;
  state_t state;
  logic msg_load, key_we, addr_clr, addr_inc, half_sel, align_load, align_rotl, align_rotr;
  logic enc_en, rng_step;
  logic [4:0] remaining;
  int checks = 0, failures = 0;

  control_unit dut (.*);
  address_increment u_addr (.clk, .rst, .clr(addr_clr), .inc(addr_inc), .addr);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (state %s)", what, state.name()); end
  endtask

  initial begin
    rst = 1; go = 0; kn_small = '0; kn_large = '0;
    @(negedge clk); rst = 0;
    for (int blk = 0; blk < 8; blk++) begin
      repeat (3) begin
        chk(state == S_INIT && addr_clr, "Init waits");
        @(negedge clk);
      end
      go = 1;
      @(negedge clk); go = 0;
      chk(state == S_LMSG && msg_load, "LMsg");
      @(negedge clk);
      for (int p = 0; p < 16; p++) begin
        chk(state == S_LKEY && key_we && addr == 4'(p), $sformatf("LKey %0d", p));
        @(negedge clk);
      end
      for (int h = 0; h < 2; h++) begin
        int used;
        used = 0;
        chk(state == S_LMSGCACHE && align_load && half_sel == 1'(h), "LMsgCache load");
        @(negedge clk);
        while (used < 16) begin
          int a, b;
          a = $urandom_range(0, 7); b = $urandom_range(0, 7);
          kn_small = key_t'((a < b) ? a : b); kn_large = key_t'((a < b) ? b : a);
          chk(state == S_CIRC && align_rotl && !enc_en, "Circ");
          @(negedge clk);
          chk(state == S_ENCRYPT && enc_en && rng_step && align_rotr && addr_inc, "Encrypt");
          chk(int'(remaining) == 16 - used, "remaining");
          used += int'(kn_large) - int'(kn_small) + 1;
          @(negedge clk);
        end
      end
      chk(state == S_LMSGCACHE && !align_load, "final LMsgCache");
      @(negedge clk);
    end
    chk(state == S_INIT, "end in Init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
