// fx_divider: fully pipelined signed divider (radix-2, restoring).
//
// Divides a NUM_W-bit signed dividend by a DEN_W-bit signed divisor and
// returns the quotient rounded toward zero, saturated to OUT_W signed bits
// (symmetric: +/-(2^(OUT_W-1)-1)). A division by zero gives the saturated
// value of the dividend's sign. One division can start every cycle; each
// carries a TAG_W-bit tag to its result.
//
// Pipeline: one stage takes the magnitudes, NUM_W stages each produce one
// quotient bit (shift the next dividend bit into the partial remainder,
// subtract the divisor when it fits), and one stage restores the sign and
// saturates. Latency is therefore NUM_W+2 cycles from in_valid to out_valid.
//
// The core uses a divider for Cramer's rule; the paper takes it from the
// FPGA vendor's IP library. This module is a plain replacement with the same
// role (pipelined, one result per cycle); its algorithm and latency are this
// design's.
module fx_divider #(
  parameter int unsigned NUM_W = 48,
  parameter int unsigned DEN_W = 32,
  parameter int unsigned OUT_W = 32,
  parameter int unsigned TAG_W = 4
) (
  input  logic                    clk,
  input  logic                    rst,       // synchronous, active high
  input  logic                    in_valid,
  input  logic signed [NUM_W-1:0] num,
  input  logic signed [DEN_W-1:0] den,
  input  logic        [TAG_W-1:0] in_tag,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] quot,
  output logic        [TAG_W-1:0] out_tag
);
  localparam int unsigned STAGES = NUM_W;

  // Stage k = 0 holds the magnitudes; stage k = 1..STAGES holds the state
  // after k quotient bits.
  logic             v   [STAGES+1];
  logic             neg [STAGES+1];
  logic [TAG_W-1:0] tag [STAGES+1];
  logic [DEN_W-1:0] d   [STAGES+1];   // divisor magnitude
  logic [DEN_W-1:0] rem [STAGES+1];   // partial remainder
  logic [NUM_W-1:0] nq  [STAGES+1];   // dividend bits out, quotient bits in

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k <= STAGES; k++) v[k] <= 1'b0;
    end else begin
      v[0] <= in_valid;
      for (int k = 1; k <= STAGES; k++) v[k] <= v[k-1];
    end
  end

  always_ff @(posedge clk) begin
    neg[0] <= num[NUM_W-1] ^ den[DEN_W-1];
    tag[0] <= in_tag;
    nq[0]  <= num[NUM_W-1] ? NUM_W'(-num) : NUM_W'(num);
    d[0]   <= den[DEN_W-1] ? DEN_W'(-den) : DEN_W'(den);
    rem[0] <= '0;
    for (int k = 1; k <= STAGES; k++) begin
      logic [DEN_W:0] trial;
      trial  = {rem[k-1], nq[k-1][NUM_W-1]};
      neg[k] <= neg[k-1];
      tag[k] <= tag[k-1];
      d[k]   <= d[k-1];
      if (trial >= {1'b0, d[k-1]}) begin
        rem[k] <= DEN_W'(trial - {1'b0, d[k-1]});
        nq[k]  <= {nq[k-1][NUM_W-2:0], 1'b1};
      end else begin
        rem[k] <= trial[DEN_W-1:0];
        nq[k]  <= {nq[k-1][NUM_W-2:0], 1'b0};
      end
    end
  end

  // Sign restore and saturation.
  localparam logic [NUM_W-1:0] MAXMAG = NUM_W'((64'd1 << (OUT_W-1)) - 1);
  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= v[STAGES];
    out_tag <= tag[STAGES];
    if (nq[STAGES] > MAXMAG)
      quot <= neg[STAGES] ? -OUT_W'(MAXMAG) : OUT_W'(MAXMAG);
    else
      quot <= neg[STAGES] ? -OUT_W'(nq[STAGES]) : OUT_W'(nq[STAGES]);
  end
endmodule
