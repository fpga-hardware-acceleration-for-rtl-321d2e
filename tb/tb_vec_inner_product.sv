// tb_vec_inner_product: checks s^T s against the bit-exact reference for
// random vectors and checks the one-cycle latency.
module tb_vec_inner_product;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  vec3_t s;
  fix_t out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vec_inner_product dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int exp;
    s = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 200; k++) begin
      for (int i = 0; i < 3; i++) s[i] <= int'($urandom_range(0, 6*65536)) - 3*65536;
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      exp = rmul(s[0], s[0]) + rmul(s[1], s[1]) + rmul(s[2], s[2]);
      #1;
      checks++;
      if (!out_valid || out != exp) begin
        failures++;
        $display("mismatch k=%0d got %0d exp %0d valid %0b", k, out, exp, out_valid);
      end
    end
    @(posedge clk); #1;
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
