// tb_random_number_generator: checks the seed after reset, that the vector
// only moves when `step` is high, each step against the recurrence
// x^16 + x^14 + x^13 + x^11 + 1, and that the period is exactly 65535
// (maximal length), which is what the polynomial must guarantee.
module tb_random_number_generator;
  import mhhea_pkg::*;
  logic clk = 1'b0, rst, step;
  logic [15:0] v;
  int checks = 0, failures = 0;

  random_number_generator dut (.*);
  always #1 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [15:0] m, first;
    int period;
    rst = 1; step = 0;
    @(negedge clk); rst = 0;
    chk(v === 16'hACE1, "seed");
    m = v;
    for (int t = 0; t < 200; t++) begin
      step = $urandom_range(0, 1);
      @(negedge clk);
      if (step) m = {m[14:0], m[15] ^ m[13] ^ m[12] ^ m[10]};
      chk(v === m, $sformatf("step %0d: %h expected %h", t, v, m));
    end
    step = 1;
    first = v; period = 0;
    do begin
      @(negedge clk); period++;
      if (v == 16'h0) break;
    end while (v != first && period < 70000);
    chk(period == 65535, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
