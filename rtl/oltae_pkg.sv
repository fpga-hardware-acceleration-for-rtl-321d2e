// oltae_pkg: number format, vector/matrix types and shared arithmetic of the
// OLTAE attitude-estimation core.
//
// Every quantity in the core is a 32-bit two's-complement fixed-point number
// with 1 sign bit, 15 integer bits and 16 fractional bits (Q15.16), the
// format the core is specified with. Vectors are three such words and 3x3
// matrices are three row vectors. Products of two Q15.16 numbers are formed
// at full 64-bit width and brought back to Q15.16 by an arithmetic shift
// right of 16 bits (rounding toward minus infinity) and truncation to 32
// bits; this rounding rule is a choice of this design. Sums wrap; inputs are
// expected to be scaled by the host so that they stay in range.
package oltae_pkg;

  localparam int unsigned DATA_W = 32;  // word width
  localparam int unsigned FRAC_W = 16;  // fractional bits

  typedef logic signed [DATA_W-1:0] fix_t;
  typedef fix_t [2:0]               vec3_t;  // [i] = component i
  typedef vec3_t [2:0]              mat3_t;  // [r][c] = row r, column c

  // Top-level controller states (IDLE -> COMPUTE -> DONE -> IDLE).
  typedef enum logic [1:0] {
    ST_IDLE    = 2'd0,
    ST_COMPUTE = 2'd1,
    ST_DONE    = 2'd2
  } oltae_state_e;

  // Sub-phases of COMPUTE.
  typedef enum logic [1:0] {
    PH_ACCUM  = 2'd0,  // reading and accumulating measurements
    PH_INV    = 2'd1,  // Cramer's-rule inverse running
    PH_MATVEC = 2'd2,  // matrix-vector product running
    PH_OUT    = 2'd3   // result words streamed out
  } oltae_phase_e;

  // Q15.16 product, full-width multiply then arithmetic shift.
  function automatic fix_t fxmul(input fix_t a, input fix_t b);
    logic signed [2*DATA_W-1:0] p;
    p = a * b;
    return fix_t'(p >>> FRAC_W);
  endfunction

endpackage
