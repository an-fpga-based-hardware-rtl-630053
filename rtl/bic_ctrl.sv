// bic_ctrl: the sequencer of the bitmap index creator.
//
// A run starts with `start` and the run's settings: where the instructions,
// the data batches and the results lie in external memory, the number of
// instructions (1..IM_DEPTH) and the number of batches.  The sequencer then
//   1. has the DMA copy the instructions into the instruction memory (once),
//   2. for every batch: has the DMA load the batch's N words into the R-CAM,
//      runs all instructions, and has the DMA send the same batch again as a
//      clear, which leaves the R-CAM empty for the next batch,
//   3. waits until the result FIFO has been written out, pulses `done`.
// Batches lie back to back from data_base, N*M/W beats each.
//
// Instructions run in a three-stage pipeline, one per cycle: stage 1 reads
// the instruction memory, stage 2 searches the R-CAM with the key, stage 3
// hands operation and bitmap to the query logic array.  When the QLA is busy
// moving a result out (after EQ) the pipeline stalls: the IM and R-CAM keep
// their outputs (read enables low) until the QLA is ready again.  The next
// batch is started only when every instruction has been taken and the last
// result has fully entered the FIFO.
//
// `phase` tells the cycle counters what the sequencer is doing.
//
// From the paper: the order of steps (IM first, then per batch CAM load,
// indexing and output), one instruction per cycle, the clear of old data by
// rewriting it with RESET = 1, and the start of the next indexing once the
// result register is in the FIFO.  This design's own choices: clearing a
// batch right after its instructions rather than before the next load (the
// same work, but the R-CAM is empty between runs and after power-up), the
// start/done handshake and the settings ports.
//
// Lint note: the reserved bits 15..3 of the instruction word are read from
// the IM but not used, as the instruction format has them unused.
module bic_ctrl
  import bic_pkg::*;
#(
  parameter int unsigned N        = 65536,
  parameter int unsigned M        = 8,
  parameter int unsigned W        = 256,
  parameter int unsigned IM_DEPTH = 4096,
  parameter int unsigned ADDR_W   = 25,
  parameter int unsigned NB_W     = 14,
  parameter int unsigned CNT_W    = 16,
  localparam int unsigned NI_W    = $clog2(IM_DEPTH + 1),
  localparam int unsigned RAW     = $clog2(IM_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // run control
  input  logic              start,
  input  logic [ADDR_W-1:0] instr_base,
  input  logic [NI_W-1:0]   num_instr,
  input  logic [ADDR_W-1:0] data_base,
  input  logic [NB_W-1:0]   num_batches,
  input  logic [ADDR_W-1:0] result_base,
  output logic              busy,
  output logic              done,
  output phase_e            phase,
  // DMA
  output logic              rd_start,
  output logic              rd_to_cam,
  output logic              rd_clr,
  output logic [ADDR_W-1:0] rd_base,
  output logic [CNT_W-1:0]  rd_beats,
  input  logic              rd_done,
  output logic              wr_init,
  output logic [ADDR_W-1:0] wr_base,
  // instruction memory read
  output logic              im_re,
  output logic [RAW-1:0]    im_raddr,
  input  instr_t            im_rdata,
  // R-CAM search
  output logic              cam_re,
  output logic [M-1:0]      cam_key,
  // query logic array
  output logic              qla_valid,
  output op_t               qla_op,
  input  logic              qla_ready,
  input  logic              qla_streaming,
  input  logic              fifo_empty
);

  localparam int unsigned BATCH_BEATS = N * M / W;
  localparam int unsigned PER_BEAT    = W / INSTR_W;

  logic [NI_W-1:0]   n_instr, pc;
  logic [NB_W-1:0]   n_batch, batch;
  logic [ADDR_W-1:0] cur_base;
  logic              v1, v2;       // stage 1 / stage 2 valid
  op_t               op2;
  logic              advance, issue, exec_empty;

  phase_e state;
  assign phase = state;

  // ---------------- instruction pipeline ----------------
  assign advance    = !v2 || qla_ready;
  assign issue      = (phase == PH_EXEC) && advance && (pc != n_instr);
  assign im_re      = issue;
  assign im_raddr   = RAW'(pc);
  assign cam_re     = advance && v1;
  assign cam_key    = im_rdata.key[M-1:0];
  assign qla_valid  = v2;
  assign qla_op     = op2;
  assign exec_empty = (pc == n_instr) && !v1 && !v2 && !qla_streaming;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1  <= 1'b0;
      v2  <= 1'b0;
      op2 <= '0;
    end else if (advance) begin
      v1 <= issue;
      v2 <= v1;
      if (v1) op2 <= im_rdata.op;
    end
  end

  // ---------------- run sequence ----------------

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= PH_IDLE;
      busy      <= 1'b0;
      done      <= 1'b0;
      n_instr   <= '0;
      n_batch   <= '0;
      batch     <= '0;
      pc        <= '0;
      cur_base  <= '0;
      rd_start  <= 1'b0;
      rd_to_cam <= 1'b0;
      rd_clr    <= 1'b0;
      rd_base   <= '0;
      rd_beats  <= '0;
      wr_init   <= 1'b0;
      wr_base   <= '0;
    end else begin
      rd_start <= 1'b0;
      wr_init  <= 1'b0;
      done     <= 1'b0;
      if (issue) pc <= pc + 1'b1;
      unique case (state)
        PH_IDLE: if (start) begin
          busy           <= 1'b1;
          n_instr        <= num_instr;
          n_batch        <= num_batches;
          batch          <= '0;
          cur_base       <= data_base;
          wr_init        <= 1'b1;
          wr_base        <= result_base;
          rd_start       <= 1'b1;
          rd_to_cam      <= 1'b0;
          rd_clr         <= 1'b0;
          rd_base        <= instr_base;
          rd_beats       <= CNT_W'((CNT_W'(num_instr) + CNT_W'(PER_BEAT - 1)) / CNT_W'(PER_BEAT));
          state <= PH_IM;
        end
        PH_IM: if (rd_done) begin
          if (n_batch == '0) begin
            state <= PH_DRAIN;
          end else begin
            rd_start       <= 1'b1;
            rd_to_cam      <= 1'b1;
            rd_clr         <= 1'b0;
            rd_base        <= cur_base;
            rd_beats       <= CNT_W'(BATCH_BEATS);
            state <= PH_LOAD;
          end
        end
        PH_LOAD: if (rd_done) begin
          pc             <= '0;
          state <= PH_EXEC;
        end
        PH_EXEC: if (exec_empty) begin
          rd_start       <= 1'b1;
          rd_to_cam      <= 1'b1;
          rd_clr         <= 1'b1;
          rd_base        <= cur_base;
          rd_beats       <= CNT_W'(BATCH_BEATS);
          state <= PH_CLEAR;
        end
        PH_CLEAR: if (rd_done) begin
          if (batch == n_batch - 1'b1) begin
            state <= PH_DRAIN;
          end else begin
            batch          <= batch + 1'b1;
            cur_base       <= cur_base + ADDR_W'(BATCH_BEATS);
            rd_start       <= 1'b1;
            rd_to_cam      <= 1'b1;
            rd_clr         <= 1'b0;
            rd_base        <= cur_base + ADDR_W'(BATCH_BEATS);
            rd_beats       <= CNT_W'(BATCH_BEATS);
            state <= PH_LOAD;
          end
        end
        PH_DRAIN: if (fifo_empty && !qla_streaming) begin
          busy           <= 1'b0;
          done           <= 1'b1;
          state <= PH_IDLE;
        end
        default: state <= PH_IDLE;
      endcase
    end
  end

endmodule
