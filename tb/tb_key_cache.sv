// tb_key_cache: writes all 16 pairs (the first six being the paper's
// (0,3) (1,4) (4,0) (0,4) (3,0) (6,4)), one per cycle, and reads every
// address back, in both banks; then overwrites random addresses, and
// finally rewrites all pairs from address 15 down to 0.
module tb_key_cache;
  import mhhea_pkg::*;
  logic clk = 1'b0, rst, we;
  logic [3:0] addr;
  key_pair_t wdata, rdata;
  key_pair_t model [16];
  int checks = 0, failures = 0;

  key_cache dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_all();
    for (int a = 0; a < 16; a++) begin
      addr = 4'(a); #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL addr %0d: %0d,%0d expected %0d,%0d", a, rdata.left, rdata.right,
                 model[a].left, model[a].right);
      end
    end
    @(negedge clk);   // back in step with the clock for the next writes
  endtask

  initial begin
    rst = 1; we = 0; addr = '0; wdata = '0;
    @(negedge clk); rst = 0;
    for (int a = 0; a < 16; a++) begin
      model[a].left = key_t'($urandom_range(0, 7));
      model[a].right = key_t'($urandom_range(0, 7));
    end
    model[0] = '{3'd0, 3'd3}; model[1] = '{3'd1, 3'd4}; model[2] = '{3'd4, 3'd0};
    model[3] = '{3'd0, 3'd4}; model[4] = '{3'd3, 3'd0}; model[5] = '{3'd6, 3'd4};
    for (int a = 0; a < 16; a++) begin
      addr = 4'(a); wdata = model[a]; we = 1;
      @(negedge clk);
    end
    we = 0;
    read_all();
    for (int t = 0; t < 40; t++) begin
      int a;
      a = $urandom_range(0, 15);
      addr = 4'(a); wdata = key_pair_t'($urandom); we = 1;
      model[a] = wdata;
      @(negedge clk); we = 0;
    end
    read_all();
    // reverse order: lower-bank writes come last and must not touch the upper bank
    for (int a = 15; a >= 0; a--) begin
      model[a] = key_pair_t'($urandom);
      addr = 4'(a); wdata = model[a]; we = 1;
      @(negedge clk);
    end
    we = 0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
