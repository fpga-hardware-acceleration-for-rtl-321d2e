// vec_cross_product: cross product s x y of a measurement pair.
//
// Six Q15.16 multipliers and three subtractors form
//   (s1*y2 - s2*y1, s2*y0 - s0*y2, s0*y1 - s1*y0)
// in parallel. The result is registered: out/out_valid follow in_valid by
// one clock cycle, one pair per cycle. The operation (s_i x y_i, the term
// of H^T Sigma^-1 y) is the paper's; the register stage is this design's.
module vec_cross_product
  import oltae_pkg::*;
(
  input  logic  clk,
  input  logic  rst,        // synchronous, active high
  input  logic  in_valid,
  input  vec3_t s,
  input  vec3_t y,
  output logic  out_valid,
  output vec3_t out         // s x y
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out[0] <= fxmul(s[1], y[2]) - fxmul(s[2], y[1]);
        out[1] <= fxmul(s[2], y[0]) - fxmul(s[0], y[2]);
        out[2] <= fxmul(s[0], y[1]) - fxmul(s[1], y[0]);
      end
    end
  end
endmodule
