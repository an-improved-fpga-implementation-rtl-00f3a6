// tb_message_cache: checks capture of a 32-bit block and selection of its
// halves, including the paper's plaintext 32'hABCD1234 (low half 16'h1234
// first), and that the block is held while `load` is low.
module tb_message_cache;
  import mhhea_pkg::*;
  logic clk = 1'b0, rst, load, half_sel;
  logic [31:0] plaintext;
  logic [15:0] half;
  int checks = 0, failures = 0;

  message_cache dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [15:0] got, input logic [15:0] exp, input string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] held;
    rst = 1; load = 0; half_sel = 0; plaintext = '0;
    @(negedge clk); rst = 0;
    plaintext = 32'hABCD1234; load = 1;
    @(negedge clk); load = 0; plaintext = 32'h0;
    half_sel = 0; #1 expect_eq(half, 16'h1234, "low half");
    half_sel = 1; #1 expect_eq(half, 16'hABCD, "high half");
    for (int t = 0; t < 20; t++) begin
      held = $urandom;
      plaintext = held; load = 1;
      @(negedge clk); load = 0;
      plaintext = $urandom;
      @(negedge clk);
      half_sel = 0; #1 expect_eq(half, held[15:0], "low half random");
      half_sel = 1; #1 expect_eq(half, held[31:16], "high half random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
