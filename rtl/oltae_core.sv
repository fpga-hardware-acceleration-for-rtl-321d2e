// oltae_core: 32-bit fixed-point OLTAE attitude estimator.
//
// The core evaluates the closed-form, centroid-aligned OLTAE estimate of the
// Classical Rodrigues Parameters (Gibbs vector) q from n processed
// measurement pairs (s_j, y_j):
//   M = sum_j ( s_j^T s_j I - s_j s_j^T )          (= H^T Sigma^-1 H)
//   v = -sum_j ( s_j x y_j )                        (= H^T Sigma^-1 y)
//   q = M^-1 v
// where s_j = db_j + da_j and y_j = db_j - da_j are sums and differences of
// the centroid-removed point pairs. The host computes s_j and y_j, scales
// them (s by alpha, y by beta, so the core returns q' = (beta/alpha) q) and
// folds each measurement weight in by multiplying both s_j and y_j by
// 1/sigma_j; the core itself applies no weights.
//
// Data path, all Q15.16: an input collector assembles one measurement from
// three vec_in words and three y_in words (x, y, z order; the two streams
// are independent and may run in the same cycles); the measurement goes to
// the inner, outer and cross product units; matrix_add forms
// s^T s I + (-s s^T); the accumulation buffers sum the terms; when n terms
// are in, matrix_inverse (Cramer's rule) inverts M, matvec_mult forms
// M^-1 v, and the three words of q' leave on data_out, one per cycle, with
// data_out_valid. oltae_ctrl sequences IDLE/COMPUTE/DONE.
//
// Interface: raise start and hold it; wait for rdDataEn, then stream 3n
// words on each of vec_in and y_in (a word is taken in every cycle its
// valid is high while rdDataEn is high; words beyond 3n are ignored). The
// two streams may be up to three words apart. After the result words, done
// is high until start is lowered. Timing: one measurement per three cycles
// at the input; the clock edge that takes the last input word is followed
// 77 edges later by the one that takes the first result word: 4 through
// the collector, product, adder and accumulator stages, 1 for the
// controller to raise the inverse's start, 62 until the controller samples
// the inverse's done (its 61-cycle latency plus the sampling edge), 1 to
// start the matrix-vector unit, 7 until its done is sampled (6 + 1), 1 to
// enter the output phase and 1 to take the word. A whole estimate of n measurements
// at full input rate takes about 3n + 80 cycles from start.
//
// Port names vec_in, y_in, vec_in_valid, y_in_valid, data_out,
// data_out_valid, rdDataEn, clk and rst are the ones of the published core;
// the direction and meaning of rdDataEn (core ready to read measurement
// data), the word order and the weight folding are this design's choices.
module oltae_core
  import oltae_pkg::*;
#(
  parameter int unsigned CNT_W = 16   // width of the measurement count n
) (
  input  logic             clk,
  input  logic             rst,            // synchronous, active high
  input  logic             start,
  input  logic [CNT_W-1:0] num_meas,       // n (>= 3)
  input  fix_t             vec_in,         // s_j components
  input  logic             vec_in_valid,
  input  fix_t             y_in,           // y_j components
  input  logic             y_in_valid,
  output fix_t             data_out,       // q' components, x first
  output logic             data_out_valid,
  output logic             rdDataEn,
  output logic             done,
  output oltae_state_e     state
);
  oltae_phase_e     phase;
  logic             acc_clear, rd_en, inv_start, mv_start, out_valid;
  logic [1:0]       out_idx;
  logic             inv_done, inv_busy, mv_done, mv_busy;
  logic [CNT_W-1:0] acc_count;

  // ---------------------------------------------------------------- input
  // Each stream has a 3-word assembly register and a one-vector holding
  // register, so either stream may run up to one vector ahead of the other.
  // A measurement fires when both holding registers are full.
  localparam int unsigned WCNT_W = CNT_W + 2;
  vec3_t             s_asm, y_asm, s_hold, y_hold;
  logic [1:0]        s_acnt, y_acnt;
  logic              s_full, y_full;
  logic [WCNT_W-1:0] s_words, y_words, words_needed;
  logic              s_take, y_take, fire;
  logic              meas_valid;
  vec3_t             meas_s, meas_y;

  assign words_needed = WCNT_W'(num_meas) * WCNT_W'(3);
  assign s_take   = rd_en && vec_in_valid && (s_words < words_needed);
  assign y_take   = rd_en && y_in_valid   && (y_words < words_needed);
  assign rdDataEn = rd_en && ((s_words < words_needed) || (y_words < words_needed));
  assign fire     = s_full && y_full;

  always_ff @(posedge clk) begin
    if (rst || acc_clear) begin
      s_asm <= '0;  y_asm <= '0;
      s_hold <= '0; y_hold <= '0;
      s_acnt <= '0; y_acnt <= '0;
      s_full <= 1'b0; y_full <= 1'b0;
      s_words <= '0; y_words <= '0;
      meas_valid <= 1'b0;
      meas_s <= '0; meas_y <= '0;
    end else begin
      meas_valid <= fire;
      if (fire) begin
        meas_s <= s_hold;
        meas_y <= y_hold;
      end
      if (fire) s_full <= 1'b0;
      if (fire) y_full <= 1'b0;
      if (s_take) begin
        s_words <= s_words + 1'b1;
        if (s_acnt == 2'd2) begin
          s_hold    <= {vec_in, s_asm[1], s_asm[0]};
          s_full    <= 1'b1;
          s_acnt    <= '0;
        end else begin
          s_asm[s_acnt] <= vec_in;
          s_acnt        <= s_acnt + 1'b1;
        end
      end
      if (y_take) begin
        y_words <= y_words + 1'b1;
        if (y_acnt == 2'd2) begin
          y_hold    <= {y_in, y_asm[1], y_asm[0]};
          y_full    <= 1'b1;
          y_acnt    <= '0;
        end else begin
          y_asm[y_acnt] <= y_in;
          y_acnt        <= y_acnt + 1'b1;
        end
      end
    end
  end

  // A vector may only complete into a holding register that is free or
  // being emptied in the same cycle (streams at most one vector apart).
  a_s_no_overrun: assert property (@(posedge clk) disable iff (rst)
    s_take && s_acnt == 2'd2 && s_full |-> fire);
  a_y_no_overrun: assert property (@(posedge clk) disable iff (rst)
    y_take && y_acnt == 2'd2 && y_full |-> fire);

  // ------------------------------------------------------------- products
  logic  ip_valid, op_valid, cp_valid, add_valid;
  fix_t  ip_out;
  mat3_t op_out, diag_m, neg_outer, add_out;
  vec3_t cp_out;

  vec_inner_product u_inner (
    .clk(clk), .rst(rst), .in_valid(meas_valid), .s(meas_s),
    .out_valid(ip_valid), .out(ip_out));

  vec_outer_product u_outer (
    .clk(clk), .rst(rst), .in_valid(meas_valid), .s(meas_s),
    .out_valid(op_valid), .out(op_out));

  vec_cross_product u_cross (
    .clk(clk), .rst(rst), .in_valid(meas_valid), .s(meas_s), .y(meas_y),
    .out_valid(cp_valid), .out(cp_out));

  always_comb begin
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++) begin
        diag_m[r][c]    = (r == c) ? ip_out : fix_t'(0);
        neg_outer[r][c] = -op_out[r][c];
      end
  end

  matrix_add u_add (
    .clk(clk), .rst(rst), .in_valid(ip_valid && op_valid),
    .a(diag_m), .b(neg_outer), .out_valid(add_valid), .out(add_out));

  // ---------------------------------------------------------- accumulate
  mat3_t m_acc;
  vec3_t v_acc;

  accumulation #(.CNT_W(CNT_W)) u_acc (
    .clk(clk), .rst(rst), .clear(acc_clear),
    .mat_valid(add_valid), .mat_in(add_out),
    .vec_valid(cp_valid),  .vec_in(cp_out),
    .mat_acc(m_acc), .vec_acc(v_acc), .mat_count(acc_count));

  // -------------------------------------------------------- solve q = M^-1 v
  mat3_t m_inv;
  fix_t  det;
  vec3_t q;

  matrix_inverse u_inv (
    .clk(clk), .rst(rst), .start(inv_start), .m(m_acc),
    .busy(inv_busy), .done(inv_done), .inv(m_inv), .det(det));

  matvec_mult u_mv (
    .clk(clk), .rst(rst), .start(mv_start), .m(m_inv), .x(v_acc),
    .busy(mv_busy), .done(mv_done), .y(q));

  // ------------------------------------------------------------- control
  oltae_ctrl #(.CNT_W(CNT_W)) u_ctrl (
    .clk(clk), .rst(rst), .start(start), .num_meas(num_meas),
    .acc_count(acc_count), .inv_done(inv_done), .mv_done(mv_done),
    .state(state), .phase(phase), .acc_clear(acc_clear), .rd_en(rd_en),
    .inv_start(inv_start), .mv_start(mv_start), .out_valid(out_valid),
    .out_idx(out_idx), .done(done));

  assign data_out_valid = out_valid;
  assign data_out       = (out_idx == 2'd3) ? fix_t'(0) : q[out_idx];

  // A new product pair must not arrive while the inverse is using M.
  a_no_input_while_solving: assert property (
    @(posedge clk) disable iff (rst) (inv_busy || mv_busy) |-> !meas_valid);
endmodule
