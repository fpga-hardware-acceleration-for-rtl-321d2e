// tb_vec_outer_product: checks all nine elements of s s^T against the
// bit-exact reference for random vectors and checks the one-cycle latency.
module tb_vec_outer_product;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  vec3_t s;
  mat3_t out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vec_outer_product dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    s = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 200; k++) begin
      for (int i = 0; i < 3; i++) s[i] <= int'($urandom_range(0, 6*65536)) - 3*65536;
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1;
      checks++; if (!out_valid) failures++;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (out[r][c] != rmul(s[r], s[c])) begin
            failures++;
            $display("mismatch k=%0d [%0d][%0d] got %0d exp %0d", k, r, c, out[r][c], rmul(s[r], s[c]));
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
