// tb_plus_one: all eight keys; the result 1..8 must not wrap at key 7.
module tb_plus_one;
  import mhhea_pkg::*;
  logic clk = 1'b0;
  key_t large_key;
  logic [3:0] amount;
  int checks = 0, failures = 0;

  plus_one dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8; i++) begin
      large_key = key_t'(i);
      @(negedge clk);
      checks++;
      if (int'(amount) != i + 1) begin failures++; $display("FAIL %0d -> %0d", i, amount); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
