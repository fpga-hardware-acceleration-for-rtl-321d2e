// oltae_top: programmable-logic top of the OLTAE pose-estimation
// accelerator.
//
// The host processor writes processed measurements into the register file
// (oltae_axi_regs) over AXI4-Lite; the register file streams them into the
// OLTAE core (oltae_core), which accumulates them, solves for the Gibbs
// vector and returns it into result registers that the host reads back.
// Everything outside the programmable logic - measurement preprocessing,
// scaling, attitude matrix and translation recovery - is the host's job.
//
// Ports: clock, synchronous active-high reset and one AXI4-Lite slave port
// (register map in oltae_axi_regs). done mirrors the core's DONE state for
// use as an interrupt line; this output is this design's addition.
module oltae_top
  import oltae_pkg::*;
#(
  parameter int unsigned ADDR_W = 5,
  parameter int unsigned CNT_W  = 16
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output logic              done
);
  logic             start, vec_in_valid, y_in_valid, data_out_valid, rdDataEn;
  logic [CNT_W-1:0] num_meas;
  fix_t             vec_in, y_in, data_out;
  oltae_state_e     state;

  oltae_axi_regs #(.ADDR_W(ADDR_W), .CNT_W(CNT_W)) u_regs (
    .clk, .rst,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .start, .num_meas, .vec_in, .vec_in_valid, .y_in, .y_in_valid,
    .state, .done, .rdDataEn, .data_out, .data_out_valid);

  oltae_core #(.CNT_W(CNT_W)) u_core (
    .clk, .rst, .start, .num_meas,
    .vec_in, .vec_in_valid, .y_in, .y_in_valid,
    .data_out, .data_out_valid, .rdDataEn, .done, .state);
endmodule
