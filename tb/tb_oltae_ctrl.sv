// tb_oltae_ctrl: walks the controller through every transition of the
// IDLE/COMPUTE/DONE machine and its COMPUTE phases: IDLE holds while start
// is low, start moves to COMPUTE with a buffer clear, measurements are read
// until the count reaches n, inverse and matrix-vector start pulses follow
// their done inputs, three output words are flagged, DONE holds while start
// stays high and returns to IDLE when start drops.
module tb_oltae_ctrl;
  import oltae_pkg::*;
  logic clk = 0, rst = 1, start = 0, inv_done = 0, mv_done = 0;
  logic [15:0] num_meas = 16'd5, acc_count = 0;
  oltae_state_e state;
  oltae_phase_e phase;
  logic acc_clear, rd_en, inv_start, mv_start, out_valid, done;
  logic [1:0] out_idx;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  oltae_ctrl dut (.*);
  task automatic expect_that(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s (state %0d phase %0d)", what, state, phase); end
  endtask
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int round = 0; round < 3; round++) begin
      repeat (4) @(posedge clk);
      #1 expect_that(state == ST_IDLE && !rd_en && !done, "IDLE holds while start=0");
      acc_count <= 16'd5;   // stale count from the last round
      start <= 1;
      @(posedge clk); #1;
      expect_that(state == ST_COMPUTE && acc_clear, "start=1: IDLE->COMPUTE with clear");
      acc_count <= 0;
      @(posedge clk); #1;
      expect_that(rd_en && !inv_start, "reading measurements, stale count ignored");
      for (int j = 1; j <= 5; j++) begin
        acc_count <= 16'(j);
        @(posedge clk); #1;
      end
      expect_that(inv_start && !rd_en && phase == PH_INV, "count==n starts inverse");
      repeat (5) begin @(posedge clk); #1; expect_that(phase == PH_INV && !inv_start, "waits for inverse"); end
      inv_done <= 1; @(posedge clk); inv_done <= 0; #1;
      expect_that(mv_start && phase == PH_MATVEC, "inverse done starts matvec");
      repeat (3) @(posedge clk);
      mv_done <= 1; @(posedge clk); mv_done <= 0; #1;
      for (int w = 0; w < 3; w++) begin
        expect_that(out_valid && out_idx == 2'(w) && state == ST_COMPUTE, "result word flagged");
        @(posedge clk); #1;
      end
      expect_that(state == ST_DONE && done && !out_valid, "done=1: COMPUTE->DONE");
      repeat (3) begin @(posedge clk); #1; expect_that(state == ST_DONE && done, "DONE holds while start=1"); end
      start <= 0;
      @(posedge clk); #1;
      expect_that(state == ST_IDLE && !done, "start=0: DONE->IDLE");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
