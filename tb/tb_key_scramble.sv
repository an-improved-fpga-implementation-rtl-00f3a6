// tb_key_scramble: the paper's two worked cases (pair (0,3) with upper
// vector byte 8'hCA gives KN1=2, KN2=5; pair (4,6) with 8'hE5 gives 2, 4),
// then every pair and many vector bytes against a model that forms the full
// slice V[k_hi+8 downto k_lo+8] bit by bit and reduces it mod 8.
module tb_key_scramble;
  import mhhea_pkg::*;
  logic clk = 1'b0;
  key_pair_t pair;
  logic [7:0] v_hi;
  key_t kn1, kn2, k_small;
  int checks = 0, failures = 0;

  key_scramble dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int l, input int r, input logic [7:0] vh);
    int lo, hi, slice, e1, e2;
    pair = '{key_t'(l), key_t'(r)}; v_hi = vh;
    @(negedge clk);
    lo = (l >= r) ? r : l; hi = (l >= r) ? l : r;
    slice = 0;
    for (int b = hi; b >= lo; b--) slice = slice * 2 + int'(vh[b]);
    e1 = (slice ^ lo) % 8;
    e2 = (e1 + hi - lo) % 8;
    checks++;
    if (int'(kn1) != e1 || int'(kn2) != e2 || int'(k_small) != lo) begin
      failures++;
      $display("FAIL (%0d,%0d) v=%h: %0d %0d %0d expected %0d %0d %0d", l, r, vh,
               kn1, kn2, k_small, e1, e2, lo);
    end
  endtask

  initial begin
    pair = '{3'd0, 3'd3}; v_hi = 8'hCA; @(negedge clk);
    checks++; if (kn1 != 3'd2 || kn2 != 3'd5) begin failures++; $display("FAIL paper case 1"); end
    pair = '{3'd4, 3'd6}; v_hi = 8'hE5; @(negedge clk);
    checks++; if (kn1 != 3'd2 || kn2 != 3'd4) begin failures++; $display("FAIL paper case 2"); end
    for (int l = 0; l < 8; l++)
      for (int r = 0; r < 8; r++)
        for (int t = 0; t < 12; t++) run(l, r, 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
