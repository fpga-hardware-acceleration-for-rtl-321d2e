// tb_matrix_add: random 3x3 sums, element by element, with wrap-around,
// and the one-cycle latency.
module tb_matrix_add;
  import oltae_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  mat3_t a, b, out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  matrix_add dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int ea [3][3];
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 200; k++) begin
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          int x, z;
          x = int'($urandom);
          z = int'($urandom);
          a[r][c] <= x;
          b[r][c] <= z;
          ea[r][c] = x + z;
        end
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1;
      checks++; if (!out_valid) failures++;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          checks++;
          if (out[r][c] != ea[r][c]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
