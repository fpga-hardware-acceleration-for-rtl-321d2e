// vec_inner_product: inner product s^T s of one processed measurement vector.
//
// The three squares are formed with three Q15.16 multipliers and summed; the
// result is registered, so out/out_valid follow in_valid by one clock cycle.
// The unit is fully pipelined and accepts a new vector every cycle. The
// operation (s_i^T s_i, a term of H^T Sigma^-1 H) is the paper's; the single
// register stage is this design's choice.
module vec_inner_product
  import oltae_pkg::*;
(
  input  logic  clk,
  input  logic  rst,        // synchronous, active high
  input  logic  in_valid,
  input  vec3_t s,
  output logic  out_valid,
  output fix_t  out         // s^T s
);
  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out <= fxmul(s[0], s[0]) + fxmul(s[1], s[1]) + fxmul(s[2], s[2]);
    end
  end
endmodule
