// tb_matrix_inverse: random well-conditioned symmetric matrices of the kind
// the core builds (sums of s^T s I - s s^T) and random general matrices.
// Checks every element against the bit-exact Cramer's-rule reference,
// checks M * inv(M) against the identity in real arithmetic, and checks
// the 61-cycle latency from start to done.
module tb_matrix_inverse;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  logic clk = 0, rst = 1, start = 0, busy, done;
  mat3_t m, inv;
  fix_t det;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  matrix_inverse dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    imat_t mi, e;
    int edet, lat;
    m = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 60; k++) begin
      if (k % 2 == 0) begin
        // Sum of n measurement terms.
        for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) mi[r][c] = 0;
        for (int j = 0; j < 8; j++) begin
          ivec_t sv;
          imat_t t;
          for (int i = 0; i < 3; i++) sv[i] = int'($urandom_range(0, 2*65536)) - 65536;
          t = ref_term_m(sv);
          for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) mi[r][c] += t[r][c];
        end
      end else begin
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++)
            mi[r][c] = int'($urandom_range(0, 4*65536)) - 2*65536 + ((r == c) ? 3*65536 : 0);
      end
      e = ref_inverse(mi, edet);
      for (int r = 0; r < 3; r++) for (int c = 0; c < 3; c++) m[r][c] <= mi[r][c];
      start <= 1;
      @(posedge clk);
      start <= 0;
      lat = 0;
      do begin @(posedge clk); lat++; #1; end while (!done);
      checks++;
      if (lat != 61) begin failures++; $display("latency %0d", lat); end
      checks++;
      if (det != edet) failures++;
      for (int r = 0; r < 3; r++)
        for (int c = 0; c < 3; c++) begin
          real acc;
          checks++;
          if (inv[r][c] != e[r][c]) begin
            failures++;
            $display("k=%0d inv[%0d][%0d] got %0d exp %0d", k, r, c, inv[r][c], e[r][c]);
          end
          acc = 0;
          for (int x = 0; x < 3; x++) acc += from_fx(mi[r][x]) * from_fx(inv[x][c]);
          acc -= (r == c) ? 1.0 : 0.0;
          checks++;
          if (acc > 0.02 || acc < -0.02) begin
            failures++;
            $display("k=%0d (M*inv - I)[%0d][%0d] = %f", k, r, c, acc);
          end
        end
      checks++;
      if (busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
