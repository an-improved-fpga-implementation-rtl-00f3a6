// tb_comparator: all 64 input pairs; small and large must be min and max.
module tb_comparator;
  import mhhea_pkg::*;
  logic clk = 1'b0;
  key_t a, b, small_key, large_key;
  int checks = 0, failures = 0;

  comparator dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++)
      for (int j = 0; j < 8; j++) begin
        a = key_t'(i); b = key_t'(j);
        @(negedge clk);
        checks++;
        if (int'(small_key) != ((i < j) ? i : j) || int'(large_key) != ((i < j) ? j : i)) begin
          failures++;
          $display("FAIL %0d,%0d -> %0d,%0d", i, j, small_key, large_key);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
