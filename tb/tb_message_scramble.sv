// tb_message_scramble: the paper's second worked word (aligned byte 8'h34,
// smaller key 4, KN1 = 2: bits 4:2 become 3'b001) and the first (key 0
// leaves the byte unchanged), then random inputs against a model that walks
// q = 0,1,2,0,... from KN1 upwards as the algorithm does.
module tb_message_scramble;
  import mhhea_pkg::*;
  logic clk = 1'b0;
  logic [7:0] aligned, scrambled;
  key_t k_small, kn_small;
  int checks = 0, failures = 0;

  message_scramble dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    aligned = 8'h34; k_small = 3'd4; kn_small = 3'd2; @(negedge clk);
    checks++; if (scrambled[4:2] !== 3'b001) begin failures++; $display("FAIL paper word 2"); end
    aligned = 8'h41; k_small = 3'd0; kn_small = 3'd2; @(negedge clk);
    checks++; if (scrambled !== 8'h41) begin failures++; $display("FAIL paper word 1"); end
    for (int t = 0; t < 1000; t++) begin
      logic [7:0] e;
      int q;
      aligned = 8'($urandom); k_small = key_t'($urandom); kn_small = key_t'($urandom);
      @(negedge clk);
      e = aligned; q = 0;
      for (int j = int'(kn_small); j < 8; j++) begin
        q = q % 3;
        e[j] = aligned[j] ^ k_small[q];
        q++;
      end
      checks++;
      if (scrambled !== e) begin
        failures++;
        $display("FAIL %h k=%0d kn=%0d: %h expected %h", aligned, k_small, kn_small, scrambled, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
