// tb_mac_unit: random dot products of random length; checks the sum after
// each term, that first restarts the sum and that en low holds it.
module tb_mac_unit;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  logic clk = 0, rst = 1, en = 0, first = 0;
  fix_t a, b, acc;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mac_unit dut (.*);
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int exp;
    a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int k = 0; k < 100; k++) begin
      int len;
      len = 1 + int'($urandom % 6);
      exp = 0;
      for (int j = 0; j < len; j++) begin
        int x, z;
        x = int'($urandom_range(0, 8*65536)) - 4*65536;
        z = int'($urandom_range(0, 8*65536)) - 4*65536;
        a <= x; b <= z; en <= 1; first <= (j == 0);
        exp = exp + rmul(x, z);
        @(posedge clk);
        #1;
        checks++;
        if (acc != exp) begin
          failures++;
          $display("mismatch k=%0d j=%0d got %0d exp %0d", k, j, acc, exp);
        end
      end
      en <= 0;
      a <= 32'h1234_5678;
      @(posedge clk);
      #1;
      checks++;
      if (acc != exp) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
