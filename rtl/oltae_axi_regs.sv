// oltae_axi_regs: software-accessible registers of the OLTAE core on an
// AXI4-Lite slave port.
//
// The host (processing system) drives the core only through these
// registers. Register map (byte addresses, 32-bit words):
//   0x00 CTRL     RW  bit 0 = start
//   0x04 NUM_MEAS RW  n, the number of measurements of this estimate
//   0x08 VEC_IN   W   each write sends one s_j word to the core
//   0x0C Y_IN     W   each write sends one y_j word to the core
//   0x10 STATUS   R   [1:0] state (0 IDLE, 1 COMPUTE, 2 DONE), [2] done,
//                     [3] rdDataEn
//   0x14 Q0, 0x18 Q1, 0x1C Q2  R  the three words of the last result,
//                     captured from the core's output stream
// A write to VEC_IN / Y_IN raises vec_in_valid / y_in_valid for one cycle
// with the written word. Reads of write-only addresses return 0; write
// strobes are ignored (full-word writes only); responses are always OKAY.
//
// Handshake: a write is taken in the cycle in which AWVALID and WVALID are
// both high and no write response is pending (AWREADY and WREADY are raised
// together for that cycle); BVALID follows one cycle later and holds until
// BREADY. A read is taken when ARVALID is high and no read data is pending;
// RVALID follows one cycle later and holds, with stable RDATA, until
// RREADY. The register set and its use follow the paper's description of
// the PS/PL split; the map and handshake timing are this design's.
module oltae_axi_regs
  import oltae_pkg::*;
#(
  parameter int unsigned ADDR_W = 5,
  parameter int unsigned CNT_W  = 16
) (
  input  logic              clk,
  input  logic              rst,          // synchronous, active high
  // AXI4-Lite slave
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
  // core side
  output logic              start,
  output logic [CNT_W-1:0]  num_meas,
  output fix_t              vec_in,
  output logic              vec_in_valid,
  output fix_t              y_in,
  output logic              y_in_valid,
  input  oltae_state_e      state,
  input  logic              done,
  input  logic              rdDataEn,
  input  fix_t              data_out,
  input  logic              data_out_valid
);
  localparam logic [ADDR_W-3:0] A_CTRL = 0, A_NUM = 1, A_VEC = 2, A_Y = 3,
                                A_STATUS = 4, A_Q0 = 5, A_Q1 = 6, A_Q2 = 7;

  vec3_t      q_reg;
  logic [1:0] q_idx;
  logic       wr_take, rd_take;
  logic [ADDR_W-3:0] waddr, raddr;

  assign wr_take = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign rd_take = s_axi_arvalid && !s_axi_rvalid;
  assign waddr   = s_axi_awaddr[ADDR_W-1:2];
  assign raddr   = s_axi_araddr[ADDR_W-1:2];

  assign s_axi_awready = wr_take;
  assign s_axi_wready  = wr_take;
  assign s_axi_arready = rd_take;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  // Write side.
  always_ff @(posedge clk) begin
    if (rst) begin
      start        <= 1'b0;
      num_meas     <= '0;
      vec_in       <= '0;
      y_in         <= '0;
      vec_in_valid <= 1'b0;
      y_in_valid   <= 1'b0;
      s_axi_bvalid <= 1'b0;
    end else begin
      vec_in_valid <= 1'b0;
      y_in_valid   <= 1'b0;
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_take) begin
        s_axi_bvalid <= 1'b1;
        unique case (waddr)
          A_CTRL: start    <= s_axi_wdata[0];
          A_NUM:  num_meas <= s_axi_wdata[CNT_W-1:0];
          A_VEC: begin vec_in <= s_axi_wdata; vec_in_valid <= 1'b1; end
          A_Y:   begin y_in   <= s_axi_wdata; y_in_valid   <= 1'b1; end
          default: ;
        endcase
      end
    end
  end

  // Result capture from the core's output stream.
  always_ff @(posedge clk) begin
    if (rst) begin
      q_reg <= '0;
      q_idx <= '0;
    end else if (data_out_valid) begin
      q_reg[q_idx] <= data_out;
      q_idx        <= (q_idx == 2'd2) ? 2'd0 : q_idx + 1'b1;
    end
  end

  // Read side.
  always_ff @(posedge clk) begin
    if (rst) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_take) begin
        s_axi_rvalid <= 1'b1;
        unique case (raddr)
          A_CTRL:   s_axi_rdata <= {31'd0, start};
          A_NUM:    s_axi_rdata <= 32'(num_meas);
          A_STATUS: s_axi_rdata <= {28'd0, rdDataEn, done, state};
          A_Q0:     s_axi_rdata <= q_reg[0];
          A_Q1:     s_axi_rdata <= q_reg[1];
          A_Q2:     s_axi_rdata <= q_reg[2];
          default:  s_axi_rdata <= '0;
        endcase
      end
    end
  end

  // AXI rules the slave itself must keep.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (rst)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
endmodule
