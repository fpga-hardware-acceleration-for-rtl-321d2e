// matrix_add: element-wise sum of two 3x3 Q15.16 matrices.
//
// In the core it forms s^T s I + (-s s^T): operand a is the inner product
// placed on the diagonal and operand b is the negated outer product. Nine
// adders work in parallel and the sum is registered, so out/out_valid
// follow in_valid by one clock cycle, one matrix per cycle. The operation
// is the paper's; the register stage is this design's.
module matrix_add
  import oltae_pkg::*;
(
  input  logic  clk,
  input  logic  rst,        // synchronous, active high
  input  logic  in_valid,
  input  mat3_t a,
  input  mat3_t b,
  output logic  out_valid,
  output mat3_t out         // a + b
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++)
            out[r][c] <= a[r][c] + b[r][c];
    end
  end
endmodule
