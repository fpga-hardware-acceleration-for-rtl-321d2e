// accumulation: the two accumulation buffers of the core.
//
// Buffer M sums the 3x3 per-measurement matrices s^T s I - s s^T into
// H^T Sigma^-1 H; buffer V sums the per-measurement cross products into
// H^T Sigma^-1 y. Because H^T Sigma^-1 y = -sum(s x y), V subtracts each
// cross product it receives. The measurement weights 1/sigma^2 are folded
// into the inputs by the host (see oltae_core), so the buffers add plainly.
// clear zeroes both buffers; mat_valid / vec_valid add one term each in the
// same cycle (they may be active together). The sums are visible on the
// outputs one cycle after the term is presented. A count of matrix terms
// taken since the last clear is kept for the controller. Two buffers and
// accumulation follow the paper; the sign convention, counter and clear
// are this design's.
module accumulation
  import oltae_pkg::*;
#(
  parameter int unsigned CNT_W = 16   // width of the term counter
) (
  input  logic             clk,
  input  logic             rst,       // synchronous, active high
  input  logic             clear,     // zero both buffers and the counter
  input  logic             mat_valid,
  input  mat3_t            mat_in,    // s^T s I - s s^T
  input  logic             vec_valid,
  input  vec3_t            vec_in,    // s x y
  output mat3_t            mat_acc,   // H^T Sigma^-1 H
  output vec3_t            vec_acc,   // H^T Sigma^-1 y
  output logic [CNT_W-1:0] mat_count  // matrix terms accumulated
);
  always_ff @(posedge clk) begin
    if (rst || clear) begin
      mat_acc   <= '0;
      vec_acc   <= '0;
      mat_count <= '0;
    end else begin
      if (mat_valid) begin
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++)
            mat_acc[r][c] <= mat_acc[r][c] + mat_in[r][c];
        mat_count <= mat_count + 1'b1;
      end
      if (vec_valid)
        for (int i = 0; i < 3; i++)
          vec_acc[i] <= vec_acc[i] - vec_in[i];
    end
  end
endmodule
