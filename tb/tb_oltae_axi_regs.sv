// tb_oltae_axi_regs: AXI4-Lite master driving the register file alone.
// Checks CTRL and NUM_MEAS write/read-back, that each VEC_IN / Y_IN write
// gives exactly one valid pulse with the written word, that STATUS reflects
// the core-side inputs, that the result words are captured from the output
// stream into Q0..Q2, and that BVALID/RVALID hold until accepted.
module tb_oltae_axi_regs;
  import oltae_pkg::*;
  logic clk = 0, rst = 1;
  logic [4:0] s_axi_awaddr = 0, s_axi_araddr = 0;
  logic s_axi_awvalid = 0, s_axi_wvalid = 0, s_axi_bready = 0, s_axi_arvalid = 0, s_axi_rready = 0;
  logic s_axi_awready, s_axi_wready, s_axi_bvalid, s_axi_arready, s_axi_rvalid;
  logic [31:0] s_axi_wdata = 0, s_axi_rdata;
  logic [3:0] s_axi_wstrb = 4'hf;
  logic [1:0] s_axi_bresp, s_axi_rresp;
  logic start, vec_in_valid, y_in_valid;
  logic [15:0] num_meas;
  fix_t vec_in, y_in;
  oltae_state_e state = ST_IDLE;
  logic done = 0, rdDataEn = 0, data_out_valid = 0;
  fix_t data_out = 0;
  int checks = 0, failures = 0;
  int vec_pulses = 0, y_pulses = 0;
  fix_t last_vec, last_y;
  always #5 clk = ~clk;
  oltae_axi_regs dut (.*);

  always @(posedge clk) begin
    if (!rst && vec_in_valid) begin vec_pulses++; last_vec = vec_in; end
    if (!rst && y_in_valid)   begin y_pulses++;   last_y   = y_in;   end
  end

  task automatic expect_that(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [4:0] addr, input logic [31:0] data, input int bdelay);
    s_axi_awaddr <= addr; s_axi_wdata <= data;
    s_axi_awvalid <= 1; s_axi_wvalid <= 1;
    do @(posedge clk); while (!(s_axi_awready && s_axi_wready));
    s_axi_awvalid <= 0; s_axi_wvalid <= 0;
    repeat (bdelay) begin @(posedge clk); #1; expect_that(s_axi_bvalid, "BVALID holds"); end
    s_axi_bready <= 1;
    do @(posedge clk); while (!s_axi_bvalid);
    s_axi_bready <= 0;
    #1;
  endtask

  task automatic axi_read(input logic [4:0] addr, output logic [31:0] data, input int rdelay);
    logic [31:0] first;
    s_axi_araddr <= addr; s_axi_arvalid <= 1;
    do @(posedge clk); while (!s_axi_arready);
    s_axi_arvalid <= 0;
    @(posedge clk); #1;
    first = s_axi_rdata;
    repeat (rdelay) begin @(posedge clk); #1; expect_that(s_axi_rvalid && s_axi_rdata == first, "RVALID/RDATA hold"); end
    s_axi_rready <= 1;
    do @(posedge clk); while (!s_axi_rvalid);
    data = s_axi_rdata;
    s_axi_rready <= 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    repeat (2) @(posedge clk);
    rst <= 0;
    @(posedge clk);
    axi_write(5'h04, 32'd25, 2);
    axi_read(5'h04, rd, 1);
    expect_that(rd == 25 && num_meas == 25, "NUM_MEAS write/read");
    axi_write(5'h00, 32'd1, 0);
    expect_that(start, "start set");
    axi_read(5'h00, rd, 0);
    expect_that(rd == 1, "CTRL read");
    for (int k = 0; k < 6; k++) begin
      logic [31:0] w;
      w = $urandom;
      axi_write(5'h08, w, k % 2);
      expect_that(vec_pulses == k + 1 && last_vec == w, "VEC_IN pulse and word");
      w = $urandom;
      axi_write(5'h0C, w, 0);
      expect_that(y_pulses == k + 1 && last_y == w, "Y_IN pulse and word");
    end
    state = ST_COMPUTE; rdDataEn = 1;
    axi_read(5'h10, rd, 0);
    expect_that(rd == 32'h9, "STATUS in COMPUTE");
    // result stream
    @(posedge clk);
    data_out <= 32'h0000_1636; data_out_valid <= 1; @(posedge clk);
    data_out <= -32'sd280769;  @(posedge clk);
    data_out <= -32'sd37052;   @(posedge clk);
    data_out_valid <= 0; data_out <= 32'hdead_beef;
    state = ST_DONE; done = 1; rdDataEn = 0;
    axi_read(5'h14, rd, 1); expect_that(rd == 32'h1636, "Q0");
    axi_read(5'h18, rd, 0); expect_that(rd == 32'(-280769), "Q1");
    axi_read(5'h1C, rd, 2); expect_that(rd == 32'(-37052), "Q2");
    axi_read(5'h10, rd, 0); expect_that(rd == 32'h6, "STATUS in DONE");
    axi_read(5'h08, rd, 0); expect_that(rd == 0, "write-only reads 0");
    axi_write(5'h00, 32'd0, 0);
    expect_that(!start, "start cleared");
    expect_that(vec_pulses == 6 && y_pulses == 6, "no stray pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
