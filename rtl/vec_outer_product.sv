// vec_outer_product: outer product s s^T of one processed measurement vector.
//
// Nine Q15.16 multipliers form every element s[r]*s[c] of the 3x3 result in
// parallel; the result is registered, so out/out_valid follow in_valid by
// one clock cycle, one vector per cycle. The operation (s_i s_i^T, a term of
// H^T Sigma^-1 H) is the paper's; computing all nine elements rather than
// the six distinct ones, and the single register stage, are this design's.
module vec_outer_product
  import oltae_pkg::*;
(
  input  logic  clk,
  input  logic  rst,        // synchronous, active high
  input  logic  in_valid,
  input  vec3_t s,
  output logic  out_valid,
  output mat3_t out         // out[r][c] = s[r]*s[c]
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
            out[r][c] <= fxmul(s[r], s[c]);
    end
  end
endmodule
