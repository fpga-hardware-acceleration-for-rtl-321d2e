// tb_vec_cross_product: checks s x y against the bit-exact reference and
// against a real-valued cross product for random vectors; checks the
// one-cycle latency.
module tb_vec_cross_product;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  logic clk = 0, rst = 1, in_valid = 0, out_valid;
  vec3_t s, y, out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  vec_cross_product dut (.*);
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    ivec_t sv, yv, e;
    real rs[3], ry[3], rc[3];
    s = '0; y = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 200; k++) begin
      for (int i = 0; i < 3; i++) begin
        sv[i] = int'($urandom_range(0, 4*65536)) - 2*65536;
        yv[i] = int'($urandom_range(0, 4*65536)) - 2*65536;
        s[i] <= sv[i];
        y[i] <= yv[i];
        rs[i] = from_fx(sv[i]);
        ry[i] = from_fx(yv[i]);
      end
      e = ref_cross(sv, yv);
      rc[0] = rs[1]*ry[2] - rs[2]*ry[1];
      rc[1] = rs[2]*ry[0] - rs[0]*ry[2];
      rc[2] = rs[0]*ry[1] - rs[1]*ry[0];
      in_valid <= 1;
      @(posedge clk);
      in_valid <= 0;
      #1;
      checks++; if (!out_valid) failures++;
      for (int i = 0; i < 3; i++) begin
        checks += 2;
        if (out[i] != e[i]) begin
          failures++;
          $display("mismatch k=%0d i=%0d got %0d exp %0d", k, i, out[i], e[i]);
        end
        if (from_fx(out[i]) - rc[i] > 1e-4 || rc[i] - from_fx(out[i]) > 1e-4) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
