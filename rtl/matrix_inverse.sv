// matrix_inverse: 3x3 Q15.16 matrix inverse by Cramer's rule.
//
// After a one-cycle start pulse the unit latches m and then
//   1. forms the nine signed cofactors in parallel, using the cyclic form
//      C[r][c] = m[r+1][c+1]*m[r+2][c+2] - m[r+1][c+2]*m[r+2][c+1]
//      (indices mod 3), one cycle;
//   2. forms det = m[0][0]*C[0][0] + m[0][1]*C[0][1] + m[0][2]*C[0][2],
//      one cycle;
//   3. issues the nine divisions inv[r][c] = C[c][r] / det, one per cycle,
//      into a single pipelined divider (fx_divider). The dividend is the
//      cofactor shifted left 16 bits, so the quotient is again Q15.16.
// Results are written back by their tag; done pulses for one cycle when the
// ninth has arrived, 2 + 9 + (48+2) = 61 cycles after the start pulse. busy is high from
// start to done. det is kept for the host to inspect. A singular matrix
// gives saturated elements. Cramer's rule with a divider follows the paper;
// the sequencing, sharing one divider and the timing are this design's.
module matrix_inverse
  import oltae_pkg::*;
(
  input  logic  clk,
  input  logic  rst,      // synchronous, active high
  input  logic  start,
  input  mat3_t m,
  output logic  busy,
  output logic  done,
  output mat3_t inv,
  output fix_t  det
);
  localparam int unsigned NUM_W = DATA_W + FRAC_W;

  typedef enum logic [2:0] {S_IDLE, S_COF, S_DET, S_ISSUE, S_WAIT} inv_state_e;
  inv_state_e state;

  mat3_t      mreg;
  mat3_t      cof;
  logic [3:0] issue_idx;   // next element to issue (0..8)
  logic [3:0] recv_cnt;    // results received

  logic                    div_in_valid;
  logic signed [NUM_W-1:0] div_num;
  logic [3:0]              div_in_tag;
  logic                    div_out_valid;
  fix_t                    div_quot;
  logic [3:0]              div_out_tag;

  function automatic int unsigned m3(input int unsigned i);
    return i % 3;
  endfunction

  // Divider operand: adjugate element adj[r][c] = C[c][r], scaled by 2^16.
  always_comb begin
    int unsigned r, c;
    r = 32'(issue_idx) / 3;
    c = 32'(issue_idx) % 3;
    div_in_valid = (state == S_ISSUE);
    div_in_tag   = issue_idx;
    div_num      = NUM_W'(signed'(cof[c][r])) <<< FRAC_W;
  end

  fx_divider #(.NUM_W(NUM_W), .DEN_W(DATA_W), .OUT_W(DATA_W), .TAG_W(4)) u_div (
    .clk      (clk),
    .rst      (rst),
    .in_valid (div_in_valid),
    .num      (div_num),
    .den      (det),
    .in_tag   (div_in_tag),
    .out_valid(div_out_valid),
    .quot     (div_quot),
    .out_tag  (div_out_tag)
  );

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      issue_idx <= '0;
      recv_cnt  <= '0;
      mreg      <= '0;
      cof       <= '0;
      det       <= '0;
      inv       <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          mreg  <= m;
          state <= S_COF;
        end
        S_COF: begin
          for (int unsigned r = 0; r < 3; r++)
            for (int unsigned c = 0; c < 3; c++)
              cof[r][c] <= fxmul(mreg[m3(r+1)][m3(c+1)], mreg[m3(r+2)][m3(c+2)])
                         - fxmul(mreg[m3(r+1)][m3(c+2)], mreg[m3(r+2)][m3(c+1)]);
          state <= S_DET;
        end
        S_DET: begin
          det <= fxmul(mreg[0][0], cof[0][0]) + fxmul(mreg[0][1], cof[0][1])
               + fxmul(mreg[0][2], cof[0][2]);
          issue_idx <= '0;
          recv_cnt  <= '0;
          state     <= S_ISSUE;
        end
        S_ISSUE: begin
          issue_idx <= issue_idx + 1'b1;
          if (issue_idx == 4'd8) state <= S_WAIT;
        end
        S_WAIT: ;
        default: state <= S_IDLE;
      endcase

      if (div_out_valid) begin
        inv[div_out_tag / 3][div_out_tag % 3] <= div_quot;
        recv_cnt <= recv_cnt + 1'b1;
        if (recv_cnt == 4'd8) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      end
    end
  end
endmodule
