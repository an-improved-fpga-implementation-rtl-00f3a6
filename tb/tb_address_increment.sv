// tb_address_increment: counts through 0..15 and wraps, holds without
// `inc`, and returns to zero on `clr`, which wins over `inc`.
module tb_address_increment;
  import mhhea_pkg::*;
  logic clk = 1'b0, rst, clr, inc;
  logic [3:0] addr;
  int checks = 0, failures = 0;

  address_increment dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m = 0;
    rst = 1; clr = 0; inc = 0;
    @(negedge clk); rst = 0;
    for (int t = 0; t < 300; t++) begin
      clr = ($urandom_range(0, 19) == 0);
      inc = $urandom_range(0, 1);
      @(negedge clk);
      if (clr) m = 0; else if (inc) m = (m + 1) % 16;
      checks++;
      if (addr !== 4'(m)) begin failures++; $display("FAIL addr %0d expected %0d", addr, m); end
    end
    clr = 0; inc = 1;
    for (int t = 0; t < 17; t++) @(negedge clk);
    m = (m + 17) % 16;
    checks++;
    if (addr !== 4'(m)) begin failures++; $display("FAIL wrap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
