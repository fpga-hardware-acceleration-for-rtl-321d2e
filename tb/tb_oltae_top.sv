// tb_oltae_top: end-to-end test of the accelerator through its AXI4-Lite
// register interface, at the default parameters.
//
// A host model runs a terrain-relative-navigation sequence of 25 frames: a
// vehicle rotating at a constant rate about one axis (z) and translating at
// constant speed along two (x and z). For frame k the relative pose to the
// reference frame is a rotation of k degrees about z and a translation of
// k*(0.02, 0, -0.03). Each frame has 20 matched features at fresh random
// terrain points with random measurement weights. For every frame the host
// writes NUM_MEAS, sets CTRL.start, polls STATUS until the core reads data,
// writes the 3n words of s and y to VEC_IN / Y_IN, polls STATUS for done,
// reads Q0..Q2, lowers start and checks that the core is back in IDLE.
// The result is checked word for word against the bit-exact reference
// model and, after undoing the host scaling, against the true attitude.
// A few VEC_IN writes are made before start to check that the core ignores
// data outside its read window. Each mechanism (start, data read window,
// done held while start is high, return to IDLE, ignored early data) is
// counted and must occur.
module tb_oltae_top;
  import oltae_pkg::*;
  import oltae_ref_pkg::*;
  localparam int FRAMES = 25;
  localparam int NFEAT  = 20;
  logic clk = 0, rst = 1;
  logic [4:0]  s_axi_awaddr = 0, s_axi_araddr = 0;
  logic        s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0;
  logic        s_axi_arvalid = 0, s_axi_rready = 0;
  logic        s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [31:0] s_axi_wdata = 0, s_axi_rdata;
  logic [3:0]  s_axi_wstrb = 4'hf;
  logic [1:0]  s_axi_bresp, s_axi_rresp;
  logic        done;
  int checks = 0, failures = 0;
  int n_start = 0, n_read_window = 0, n_done_hold = 0, n_idle = 0, n_early_ignored = 0;
  int max_err_ppm = 0;
  always #5 clk = ~clk;
  oltae_top dut (.*);

  task automatic expect_that(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [4:0] addr, input logic [31:0] data);
    s_axi_awaddr <= addr; s_axi_wdata <= data;
    s_axi_awvalid <= 1; s_axi_wvalid <= 1;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    s_axi_awvalid <= 0; s_axi_wvalid <= 0;
    s_axi_bready <= 1;
    do @(posedge clk); while (!s_axi_bvalid);
    s_axi_bready <= 0;
  endtask

  task automatic axi_read(input logic [4:0] addr, output logic [31:0] data);
    s_axi_araddr <= addr; s_axi_arvalid <= 1;
    do @(posedge clk); while (!s_axi_arready);
    s_axi_arvalid <= 0;
    s_axi_rready <= 1;
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    s_axi_rready <= 0;
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s [MAXN][3];
    int y [MAXN][3];
    rvec_t qt, tt;
    ivec_t e;
    real ab, th;
    logic [31:0] rd;
    int polls;
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (2) @(posedge clk);
    for (int k = 1; k <= FRAMES; k++) begin
      th = real'(k) * 3.14159265358979 / 180.0;
      qt[0] = 0.0; qt[1] = 0.0; qt[2] = $tan(th / 2.0);
      tt[0] = 0.02 * k; tt[1] = 0.0; tt[2] = -0.03 * k;
      make_meas(qt, tt, NFEAT, s, y, ab);
      e = ref_oltae(NFEAT, s, y);

      axi_write(5'h04, 32'(NFEAT));
      if (k % 5 == 1) begin
        // Data before start must not be taken.
        axi_write(5'h08, 32'h1234_5678);
        axi_write(5'h0C, 32'h1234_5678);
        axi_read(5'h10, rd);
        if (rd[1:0] == 2'(ST_IDLE) && !rd[3]) n_early_ignored++;
      end
      axi_write(5'h00, 32'd1);
      n_start++;
      polls = 0;
      do begin axi_read(5'h10, rd); polls++; end while (!rd[3] && polls < 100);
      expect_that(rd[1:0] == 2'(ST_COMPUTE) && rd[3], "core reading data after start");
      if (rd[3]) n_read_window++;
      for (int j = 0; j < NFEAT; j++)
        for (int i = 0; i < 3; i++) begin
          axi_write(5'h08, s[j][i]);
          axi_write(5'h0C, y[j][i]);
        end
      polls = 0;
      do begin axi_read(5'h10, rd); polls++; end while (!rd[2] && polls < 200);
      expect_that(rd[2] && rd[1:0] == 2'(ST_DONE) && done, "done after the estimate");
      axi_read(5'h10, rd);
      if (rd[2] && rd[1:0] == 2'(ST_DONE)) n_done_hold++;
      for (int i = 0; i < 3; i++) begin
        real err;
        axi_read(5'(5'h14 + 4 * i), rd);
        checks++;
        if (rd != e[i]) begin
          failures++;
          $display("frame %0d q[%0d] got %0d exp %0d", k, i, $signed(rd), e[i]);
        end
        err = ab * from_fx(rd) - qt[i];
        if (err < 0) err = -err;
        if (int'(err * 1e6) > max_err_ppm) max_err_ppm = int'(err * 1e6);
        checks++;
        if (err > 0.005 + 0.02 * ((qt[i] < 0) ? -qt[i] : qt[i])) begin
          failures++;
          $display("frame %0d q[%0d] = %f, true %f", k, i, ab * from_fx(rd), qt[i]);
        end
      end
      $display("frame %2d: q3 true %8.5f estimated %8.5f", k, qt[2], ab * from_fx(e[2]));
      axi_write(5'h00, 32'd0);
      axi_read(5'h10, rd);
      expect_that(rd[1:0] == 2'(ST_IDLE) && !done, "back in IDLE after start is lowered");
      if (rd[1:0] == 2'(ST_IDLE)) n_idle++;
    end
    $display("frames %0d: start %0d, read window %0d, done held %0d, idle %0d, early data ignored %0d, max |q err| %0d ppm",
             FRAMES, n_start, n_read_window, n_done_hold, n_idle, n_early_ignored, max_err_ppm);
    checks += 5;
    if (n_start != FRAMES) failures++;
    if (n_read_window != FRAMES) failures++;
    if (n_done_hold != FRAMES) failures++;
    if (n_idle != FRAMES) failures++;
    if (n_early_ignored == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
