// tb_matvec_mult: random 3x3 matrix times vector; checks every element
// against the bit-exact reference and a real-valued product, and the
// 6-cycle latency from start to done.
module tb_matvec_mult;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  logic clk = 0, rst = 1, start = 0, busy, done;
  mat3_t m;
  vec3_t x, y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  matvec_mult dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    imat_t mi;
    ivec_t xi, e;
    int lat;
    m = '0; x = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 100; k++) begin
      for (int r = 0; r < 3; r++) begin
        xi[r] = int'($urandom_range(0, 8*65536)) - 4*65536;
        x[r] <= xi[r];
        for (int c = 0; c < 3; c++) begin
          mi[r][c] = int'($urandom_range(0, 8*65536)) - 4*65536;
          m[r][c] <= mi[r][c];
        end
      end
      e = ref_matvec(mi, xi);
      start <= 1;
      @(posedge clk);
      start <= 0;
      m <= '0;   // inputs are only needed at start
      x <= '0;
      lat = 0;
      do begin @(posedge clk); lat++; #1; end while (!done);
      checks++;
      if (lat != 6) begin failures++; $display("latency %0d", lat); end
      for (int r = 0; r < 3; r++) begin
        real rr;
        rr = 0;
        for (int c = 0; c < 3; c++) rr += from_fx(mi[r][c]) * from_fx(xi[c]);
        checks += 2;
        if (y[r] != e[r]) begin
          failures++;
          $display("k=%0d y[%0d] got %0d exp %0d", k, r, y[r], e[r]);
        end
        if (from_fx(y[r]) - rr > 1e-3 || rr - from_fx(y[r]) > 1e-3) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
