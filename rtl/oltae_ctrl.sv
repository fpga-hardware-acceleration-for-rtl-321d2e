// oltae_ctrl: state machine of the OLTAE core.
//
// The outer machine has the three states of the core's control flow:
//   IDLE    --start=1-->  COMPUTE   (IDLE holds while start=0)
//   COMPUTE --done=1--->  DONE
//   DONE    --start=0-->  IDLE      (DONE holds, done=1, while start=1)
// The host raises start as it begins to send measurements and lowers it
// after reading the result, which returns the core to IDLE.
//
// COMPUTE is sequenced through sub-phases of this design's own choosing:
//   ACCUM  : measurements are read (rd_en) until acc_count reaches num_meas;
//            then the inverse is started;
//   INV    : until inv_done, then the matrix-vector product is started;
//   MATVEC : until mv_done;
//   OUT    : the three result words are streamed (out_valid, out_idx 0..2);
//            after the third, done is raised and the state becomes DONE.
// acc_clear pulses on the IDLE->COMPUTE transition to empty the buffers.
// All outputs are registered or decoded from registered state.
module oltae_ctrl
  import oltae_pkg::*;
#(
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             rst,        // synchronous, active high
  input  logic             start,
  input  logic [CNT_W-1:0] num_meas,   // n, number of measurements
  input  logic [CNT_W-1:0] acc_count,  // measurements in the buffers
  input  logic             inv_done,
  input  logic             mv_done,
  output oltae_state_e     state,
  output oltae_phase_e     phase,
  output logic             acc_clear,
  output logic             rd_en,      // core is reading measurements
  output logic             inv_start,
  output logic             mv_start,
  output logic             out_valid,
  output logic [1:0]       out_idx,
  output logic             done
);
  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= ST_IDLE;
      phase     <= PH_ACCUM;
      acc_clear <= 1'b0;
      inv_start <= 1'b0;
      mv_start  <= 1'b0;
      out_idx   <= '0;
    end else begin
      acc_clear <= 1'b0;
      inv_start <= 1'b0;
      mv_start  <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          state     <= ST_COMPUTE;
          phase     <= PH_ACCUM;
          acc_clear <= 1'b1;
        end
        ST_COMPUTE: begin
          unique case (phase)
            PH_ACCUM: if (!acc_clear && acc_count == num_meas) begin
              inv_start <= 1'b1;
              phase     <= PH_INV;
            end
            PH_INV: if (inv_done) begin
              mv_start <= 1'b1;
              phase    <= PH_MATVEC;
            end
            PH_MATVEC: if (mv_done) begin
              out_idx <= '0;
              phase   <= PH_OUT;
            end
            PH_OUT: begin
              out_idx <= out_idx + 1'b1;
              if (out_idx == 2'd2) state <= ST_DONE;
            end
            default: phase <= PH_ACCUM;
          endcase
        end
        ST_DONE: if (!start) state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign rd_en     = (state == ST_COMPUTE) && (phase == PH_ACCUM) && !acc_clear;
  assign out_valid = (state == ST_COMPUTE) && (phase == PH_OUT);
  assign done      = (state == ST_DONE);
endmodule
