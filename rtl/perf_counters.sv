// perf_counters: cycle counters of one indexing run.
//
// Splits the run time into the parts of the accelerator's timing model:
//   cyc_im    cycles spent copying instructions into the IM       (t_IM)
//   cyc_cam   cycles spent clearing and loading the R-CAM          (t_CAM)
//   cyc_qla   cycles of instruction processing                     (t_QLA)
//   cyc_out   cycles in which a result is moved towards the FIFO   (t_OUT)
//   cyc_total all cycles from start to done
//   bi_count  number of bitmap indexes produced (EQ instructions)
// All counters clear on `start` and count while the run is busy; they are
// held after done for the host to read.  A cycle in the execute phase counts
// as t_OUT while a result is being moved out and as t_QLA otherwise, so the
// pipeline fill of two cycles per batch falls into t_QLA.  Cycles spent
// waiting for the last writes at the end fall only into cyc_total.
//
// From the paper: the existence of internal cycle counters and the four
// time components.  The exact attribution of cycles is this design's own.
module perf_counters
  import bic_pkg::*;
#(
  parameter int unsigned CW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          busy,
  input  phase_e        phase,
  input  logic          streaming,
  input  logic          eq_taken,
  output logic [CW-1:0] cyc_total,
  output logic [CW-1:0] cyc_im,
  output logic [CW-1:0] cyc_cam,
  output logic [CW-1:0] cyc_qla,
  output logic [CW-1:0] cyc_out,
  output logic [CW-1:0] bi_count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc_total <= '0;
      cyc_im    <= '0;
      cyc_cam   <= '0;
      cyc_qla   <= '0;
      cyc_out   <= '0;
      bi_count  <= '0;
    end else if (start && !busy) begin
      cyc_total <= '0;
      cyc_im    <= '0;
      cyc_cam   <= '0;
      cyc_qla   <= '0;
      cyc_out   <= '0;
      bi_count  <= '0;
    end else if (busy) begin
      cyc_total <= cyc_total + 1'b1;
      if (phase == PH_IM)                         cyc_im  <= cyc_im + 1'b1;
      if (phase == PH_LOAD || phase == PH_CLEAR)  cyc_cam <= cyc_cam + 1'b1;
      if (streaming)                              cyc_out <= cyc_out + 1'b1;
      else if (phase == PH_EXEC)                  cyc_qla <= cyc_qla + 1'b1;
      if (eq_taken)                               bi_count <= bi_count + 1'b1;
    end
  end

endmodule
