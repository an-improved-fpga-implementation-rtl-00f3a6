// tb_message_alignment: checks the one-cycle rotator. Directed values from
// the paper's worked example (16'h48D0 left by 2 gives 16'h2341, then right
// by 6 gives 16'h048D), then random loads and rotations against a bit-by-bit
// model, one clock per rotation.
module tb_message_alignment;
  import mhhea_pkg::*;
  logic clk = 1'b0, rst, load, rotl, rotr;
  logic [15:0] din, buffer;
  key_t rotl_amt;
  logic [3:0] rotr_amt;
  int checks = 0, failures = 0;

  message_alignment dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_eq(input logic [15:0] exp, input string what);
    checks++;
    if (buffer !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, buffer, exp); end
  endtask

  function automatic logic [15:0] model_rot(logic [15:0] x, int n, bit left);
    logic [15:0] r;
    for (int i = 0; i < 16; i++)
      if (left) r[(i + n) % 16] = x[i];
      else      r[i] = x[(i + n) % 16];
    return r;
  endfunction

  initial begin
    logic [15:0] m;
    rst = 1; load = 0; rotl = 0; rotr = 0; din = '0; rotl_amt = '0; rotr_amt = '0;
    @(negedge clk); rst = 0;
    din = 16'h48D0; load = 1; @(negedge clk); load = 0;
    expect_eq(16'h48D0, "load");
    rotl_amt = 3'd2; rotl = 1; @(negedge clk); rotl = 0;
    expect_eq(16'h2341, "rotate left by KN1=2");
    rotr_amt = 4'd6; rotr = 1; @(negedge clk); rotr = 0;
    expect_eq(16'h048D, "rotate right by KN2+1=6");
    @(negedge clk);
    expect_eq(16'h048D, "hold");
    m = 16'h048D;
    for (int t = 0; t < 200; t++) begin
      int op = $urandom_range(0, 2);
      if (op == 0) begin
        m = $urandom; din = m; load = 1;
      end else if (op == 1) begin
        rotl_amt = key_t'($urandom_range(0, 7)); rotl = 1;
        m = model_rot(m, int'(rotl_amt), 1'b1);
      end else begin
        rotr_amt = 4'($urandom_range(1, 8)); rotr = 1;
        m = model_rot(m, int'(rotr_amt), 1'b0);
      end
      @(negedge clk); load = 0; rotl = 0; rotr = 0;
      expect_eq(m, "random op");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
