// tb_accumulation: streams random terms into both buffers (matrix terms and
// cross-product terms, sometimes in the same cycle, sometimes apart),
// checks the running sums (the vector buffer subtracts), the term count,
// and that clear empties everything.
module tb_accumulation;
  import oltae_pkg::*;
  logic clk = 0, rst = 1, clear = 0, mat_valid = 0, vec_valid = 0;
  mat3_t mat_in, mat_acc;
  vec3_t vec_in, vec_acc;
  logic [15:0] mat_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  accumulation dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int em [3][3];
    int ev [3];
    int ecount;
    mat_in = '0; vec_in = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int round = 0; round < 4; round++) begin
      clear <= 1;
      @(posedge clk);
      clear <= 0;
      #1;
      checks++;
      if (mat_acc != '0 || vec_acc != '0 || mat_count != 0) failures++;
      for (int r = 0; r < 3; r++) begin ev[r] = 0; for (int c = 0; c < 3; c++) em[r][c] = 0; end
      ecount = 0;
      for (int k = 0; k < 40; k++) begin
        logic mv, vv;
        mv = ($urandom % 4) != 0;
        vv = ($urandom % 4) != 0;
        for (int r = 0; r < 3; r++) begin
          int x;
          x = int'($urandom_range(0, 2000000)) - 1000000;
          vec_in[r] <= x;
          if (vv) ev[r] -= x;
          for (int c = 0; c < 3; c++) begin
            x = int'($urandom_range(0, 2000000)) - 1000000;
            mat_in[r][c] <= x;
            if (mv) em[r][c] += x;
          end
        end
        if (mv) ecount++;
        mat_valid <= mv;
        vec_valid <= vv;
        @(posedge clk);
        mat_valid <= 0;
        vec_valid <= 0;
        #1;
        for (int r = 0; r < 3; r++) begin
          checks++;
          if (vec_acc[r] != ev[r]) failures++;
          for (int c = 0; c < 3; c++) begin
            checks++;
            if (mat_acc[r][c] != em[r][c]) failures++;
          end
        end
        checks++;
        if (int'(mat_count) != ecount) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
