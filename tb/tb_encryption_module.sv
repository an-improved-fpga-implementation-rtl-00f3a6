// tb_encryption_module: the paper's two worked words (vector 16'hCA06,
// aligned message 16'h2341, range 2..5 -> 16'hCA02; vector 16'hE503,
// scrambled byte with bits 4:2 = 3'b001, range 2..4 -> 16'hE507), random
// words against a model, the cut-short range at the end of a half, and the
// one-cycle `ready` with the cipher held afterwards.
module tb_encryption_module;
  import mhhea_pkg::*;
  logic clk = 1'b0, rst, en, ready;
  logic [15:0] v, cipher;
  logic [7:0] scrambled;
  key_t kn_small, kn_large;
  logic [4:0] remaining;
  int checks = 0, failures = 0;

  encryption_module dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic word(input logic [15:0] vv, input logic [7:0] s, input int k1, input int k2,
                      input int rem, input logic [15:0] exp);
    logic [15:0] held;
    v = vv; scrambled = s; kn_small = key_t'(k1); kn_large = key_t'(k2);
    remaining = 5'(rem); en = 1;
    @(negedge clk); en = 0;
    chk(ready === 1'b1, "ready after en");
    chk(cipher === exp, $sformatf("cipher %h expected %h", cipher, exp));
    held = cipher;
    v = ~vv; scrambled = ~s;
    @(negedge clk);
    chk(ready === 1'b0, "ready lasts one cycle");
    chk(cipher === held, "cipher held");
  endtask

  initial begin
    rst = 1; en = 0; v = '0; scrambled = '0; kn_small = '0; kn_large = '0; remaining = 5'd16;
    @(negedge clk); rst = 0;
    chk(ready === 1'b0, "no ready after reset");
    word(16'hCA06, 8'h41, 2, 5, 16, 16'hCA02);
    word(16'hE503, 8'hA4, 2, 4, 12, 16'hE507);
    // cut short: range 3..7 but only 2 bits left -> bits 3,4 replaced
    word(16'h5500, 8'hFF, 3, 7, 2, 16'h5518);
    for (int t = 0; t < 300; t++) begin
      logic [15:0] vv, e;
      logic [7:0] s;
      int a, b, rem, n;
      vv = 16'($urandom); s = 8'($urandom);
      a = $urandom_range(0, 7); b = $urandom_range(a, 7); rem = $urandom_range(1, 16);
      e = vv; n = 0;
      for (int j = a; j <= b; j++) begin
        if (n < rem) e[j] = s[j];
        n++;
      end
      word(vv, s, a, b, rem, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
