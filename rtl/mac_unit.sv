// mac_unit: Q15.16 multiply-accumulate processing element.
//
// On a cycle with en high the unit adds a*b to its accumulator; when first
// is also high the accumulator is loaded with a*b instead, which starts a
// new dot product without a separate clear cycle. acc shows the result one
// cycle after the last term. MAC units are the paper's building block for
// the matrix-vector product; the first/en protocol is this design's.
module mac_unit
  import oltae_pkg::*;
(
  input  logic clk,
  input  logic rst,     // synchronous, active high
  input  logic en,
  input  logic first,   // start a new sum with this term
  input  fix_t a,
  input  fix_t b,
  output fix_t acc
);
  always_ff @(posedge clk) begin
    if (rst)       acc <= '0;
    else if (en)   acc <= (first ? fix_t'(0) : acc) + fxmul(a, b);
  end
endmodule
