// matvec_mult: 3x3 matrix times 3-vector on a linear systolic chain of
// three MAC units.
//
// PE i (a mac_unit) holds row i of the matrix. After a one-cycle start the
// vector elements x[0], x[1], x[2] are fed one per cycle into PE 0 and move
// one PE further each cycle, so PE i sees x[j] at cycle i+j and accumulates
// m[i][j]*x[j]. Every PE multiplies in each cycle it holds an element, the
// same skewed, nearest-neighbour data movement as a systolic array. y is
// complete and done pulses 6 cycles after start; busy is high from the
// cycle after start until done, and a start while busy is ignored.
// The use of three MAC units with the systolic principle follows the paper;
// the feed order and timing are this design's.
module matvec_mult
  import oltae_pkg::*;
(
  input  logic  clk,
  input  logic  rst,     // synchronous, active high
  input  logic  start,
  input  mat3_t m,
  input  vec3_t x,
  output logic  busy,
  output logic  done,
  output vec3_t y        // m * x
);
  mat3_t      mreg;
  vec3_t      xreg;
  logic [1:0] feed_idx;
  logic       feeding;

  // Systolic chain registers: element value, its index and a valid bit
  // at the input of each PE.
  fix_t       xs   [3];
  logic [1:0] js   [3];
  logic       vs   [3];

  always_ff @(posedge clk) begin
    if (rst) begin
      feeding  <= 1'b0;
      feed_idx <= '0;
      mreg     <= '0;
      xreg     <= '0;
      for (int i = 0; i < 3; i++) begin
        xs[i] <= '0;
        js[i] <= '0;
        vs[i] <= 1'b0;
      end
      done <= 1'b0;
    end else begin
      if (start && !busy) begin
        mreg     <= m;
        xreg     <= x;
        feeding  <= 1'b1;
        feed_idx <= '0;
      end else if (feeding) begin
        feed_idx <= feed_idx + 1'b1;
        if (feed_idx == 2'd2) feeding <= 1'b0;
      end
      // PE 0 input from the feeder, PE i input from PE i-1.
      xs[0] <= xreg[feed_idx];
      js[0] <= feed_idx;
      vs[0] <= feeding;
      for (int i = 1; i < 3; i++) begin
        xs[i] <= xs[i-1];
        js[i] <= js[i-1];
        vs[i] <= vs[i-1];
      end
      done <= vs[2] && (js[2] == 2'd2);
    end
  end

  assign busy = feeding || vs[0] || vs[1] || vs[2];

  for (genvar i = 0; i < 3; i++) begin : g_pe
    mac_unit u_mac (
      .clk  (clk),
      .rst  (rst),
      .en   (vs[i]),
      .first(js[i] == 2'd0),
      .a    (mreg[i][js[i]]),
      .b    (xs[i]),
      .acc  (y[i])
    );
  end
endmodule
