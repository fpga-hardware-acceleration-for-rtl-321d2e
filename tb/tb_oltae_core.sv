// tb_oltae_core: end-to-end test of the OLTAE core on its streaming ports.
//
// Each estimate draws a random attitude (Gibbs vector, components in
// +/-0.35) and translation, synthesises n point pairs and their processed
// measurements (s_j, y_j) with random weights, streams them in and checks
// the three result words against the bit-exact reference model and against
// the true attitude (after undoing the host's scale factors alpha, beta). n runs from the
// minimum of 3 to 64. The two input streams are driven in four patterns:
// both at full rate together, y one word behind vec, random gaps on each
// (streams up to three words apart),
// and a burst of extra words after the n-th measurement (which must be
// ignored). The test also checks the latency from the last input word to
// the first result word, that rdDataEn drops once n measurements are in,
// that done holds while start is high, and that the core returns to IDLE.
module tb_oltae_core;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  localparam int LAT = 77;   // edge taking the last word -> edge taking the first result
  logic clk = 0, rst = 1, start = 0;
  logic [15:0] num_meas = 0;
  fix_t vec_in = 0, y_in = 0, data_out;
  logic vec_in_valid = 0, y_in_valid = 0, data_out_valid, rdDataEn, done;
  oltae_state_e state;
  int checks = 0, failures = 0;
  int cycle = 0;
  int n_pattern [4] = '{0, 0, 0, 0};
  int n_estimates = 0, n_done_hold = 0, n_ignored_extra = 0;
  int max_abs_err_ppm = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  oltae_core dut (.*);

  task automatic expect_that(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output collector.
  fix_t got [3];
  int   got_n = 0, first_out_cycle = 0;
  always @(posedge clk) if (!rst && data_out_valid) begin
    if (got_n == 0) first_out_cycle = cycle;
    if (got_n < 3) got[got_n] = data_out;
    got_n++;
  end

  int last_in_cycle;
  // Streams 3n words on each input with the given pattern.
  task automatic drive(input int n, input int pattern, input int s[MAXN][3], input int y[MAXN][3]);
    int vi, yi, total;
    total = 3 * n;
    vi = 0; yi = 0;
    if (pattern == 1) begin
      // y runs one word behind vec
      vec_in <= s[0][0]; vec_in_valid <= 1; vi = 1;
      @(posedge clk);
    end
    while (vi < total || yi < total) begin
      logic dv, dy;
      dv = (vi < total);
      dy = (yi < total);
      if (pattern == 2) begin
        // random gaps, with the streams kept within three words
        dv = dv && ($urandom % 3 != 0) && (vi - yi < 3);
        dy = dy && ($urandom % 3 != 0) && (yi - vi < 3);
      end
      vec_in_valid <= dv;
      y_in_valid   <= dy;
      if (dv) vec_in <= s[vi/3][vi%3];
      if (dy) y_in   <= y[yi/3][yi%3];
      @(posedge clk);
      if (dv) vi++;
      if (dy) yi++;
    end
    last_in_cycle = cycle;
    if (pattern == 3) begin
      // extra words beyond n measurements: must be ignored
      for (int k = 0; k < 6; k++) begin
        vec_in <= 32'h7fff_0000; y_in <= 32'h7fff_0000;
        vec_in_valid <= 1; y_in_valid <= 1;
        @(posedge clk);
        #1 if (!rdDataEn) n_ignored_extra++;
      end
    end
    vec_in_valid <= 0;
    y_in_valid <= 0;
  endtask

  initial begin
    int s [MAXN][3];
    int y [MAXN][3];
    rvec_t qt, tt;
    ivec_t e;
    real ab;
    int ns [12] = '{3, 5, 8, 12, 20, 25, 30, 40, 64, 16, 4, 10};
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int k = 0; k < 12; k++) begin
      int n, pattern;
      n = ns[k];
      pattern = k % 4;
      for (int i = 0; i < 3; i++) begin
        qt[i] = urand(-0.35, 0.35);
        tt[i] = urand(-0.5, 0.5);
      end
      make_meas(qt, tt, n, s, y, ab);
      e = ref_oltae(n, s, y);
      got_n = 0;
      num_meas <= 16'(n);
      start <= 1;
      @(posedge clk); #1;
      expect_that(state == ST_COMPUTE, "start moves IDLE->COMPUTE");
      while (!rdDataEn) @(posedge clk);
      drive(n, pattern, s, y);
      n_pattern[pattern]++;
      @(posedge clk); #1;
      expect_that(!rdDataEn, "rdDataEn low after n measurements");
      while (state != ST_DONE) @(posedge clk);
      #1;
      expect_that(got_n == 3, "three result words");
      if (pattern != 3) begin
        checks++;
        if (first_out_cycle - last_in_cycle != LAT) begin
          failures++;
          $display("latency %0d", first_out_cycle - last_in_cycle);
        end
      end
      for (int i = 0; i < 3; i++) begin
        real err;
        checks++;
        if (got[i] != e[i]) begin
          failures++;
          $display("est %0d n=%0d q[%0d] got %0d exp %0d", k, n, i, got[i], e[i]);
        end
        err = ab * from_fx(got[i]) - qt[i];
        if (err < 0) err = -err;
        if (int'(err * 1e6) > max_abs_err_ppm) max_abs_err_ppm = int'(err * 1e6);
        checks++;
        if (err > 0.005 + 0.02 * ((qt[i] < 0) ? -qt[i] : qt[i])) begin
          failures++;
          $display("est %0d n=%0d q[%0d] = %f, true %f", k, n, i, ab * from_fx(got[i]), qt[i]);
        end
      end
      n_estimates++;
      repeat (3) @(posedge clk);
      #1;
      if (state == ST_DONE && done) n_done_hold++;
      start <= 0;
      @(posedge clk); #1;
      expect_that(state == ST_IDLE && !done, "start=0 returns DONE->IDLE");
      repeat (2) @(posedge clk);
    end
    $display("estimates %0d, patterns %0d/%0d/%0d/%0d, done-hold %0d, extra words ignored %0d, max |q err| %0d ppm",
             n_estimates, n_pattern[0], n_pattern[1], n_pattern[2], n_pattern[3],
             n_done_hold, n_ignored_extra, max_abs_err_ppm);
    for (int p = 0; p < 4; p++) begin checks++; if (n_pattern[p] == 0) failures++; end
    checks++; if (n_done_hold != n_estimates) failures++;
    checks++; if (n_ignored_extra == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
