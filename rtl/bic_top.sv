// bic_top: the bitmap index creator (BIC), BIC64K8 by default.
//
// The accelerator turns a column of M-bit values into bitmap indexes: for a
// key k, bit r of BI(k) is 1 when record r holds k.  A batch of N values is
// loaded into a RAM-based CAM (R-CAM) whose RAM is laid out as the transpose
// of the bitmap index, so a search with one key returns the key's whole
// N-bit bitmap in one cycle.  A small program of OR / NO / EQ instructions,
// kept in the instruction memory (IM), combines these bitmaps in the query
// logic array (QLA) into point and range indexes (e.g. Age != {10,17,29}
// or Age <= 10) and sends each finished index to external memory.
//
// Blocks: dma (three channels: instructions in, data in, results out),
// im, rcam (bit-sliced, W/M words loaded per cycle), qla (logic array,
// result register, result FIFO), bic_ctrl (run sequence and instruction
// pipeline) and perf_counters.  The DDR3 memory and its controller are
// outside: the memory ports below connect to them.  The host's run settings
// are plain input ports.
//
// Memory ports: beat addresses (one beat = W bits).  Reads: mem_rd_valid/
// mem_rd_ready request, in-order mem_rd_rvalid/mem_rd_rdata response.
// Writes: mem_wr_valid/mem_wr_ready with address and data.
//
// Timing with a memory that never stalls, per run of B batches and Ni
// instructions containing E EQs: about Ni*32/W cycles to fill the IM, then
// per batch 2*N*M/W cycles to load and clear the R-CAM, Ni cycles for the
// instructions and E*N/W cycles to move results into the FIFO, plus a few
// cycles of pipeline and handshake per step.
//
// Default sizes are the paper's BIC64K8 (N = 65,536, M = 8, W = 256,
// 4,096 instructions); N = 32,768 with M = 16 gives BIC32K16.
//
// Other outputs: the cycle counters of a run (cyc_total, cyc_im, cyc_cam,
// cyc_qla, cyc_out), the number of bitmaps produced (bi_count) and the
// number of result beats written to memory (beats_written).
//
// From the paper: the block structure, the sizes, the instruction format
// and the timing model.  This design's own choices: the memory port
// protocol, beat addressing (25 bits = 1 GB), the settings ports, the FIFO
// depth, clearing each batch right after its program, and the 11-bit R-CAM
// beat address (the figure prints 12).
module bic_top
  import bic_pkg::*;
#(
  parameter int unsigned N          = DEF_N,
  parameter int unsigned M          = DEF_M,
  parameter int unsigned W          = BUS_W,
  parameter int unsigned IM_DEPTH   = DEF_IM,
  parameter int unsigned FIFO_DEPTH = DEF_FIFO,
  parameter int unsigned ADDR_W     = DEF_ADDR_W,
  parameter int unsigned NB_W       = 14,
  parameter int unsigned MAX_OUT    = 32,
  localparam int unsigned NI_W      = $clog2(IM_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // run settings and control (from the host)
  input  logic              start,
  input  logic [ADDR_W-1:0] instr_base,
  input  logic [NI_W-1:0]   num_instr,
  input  logic [ADDR_W-1:0] data_base,
  input  logic [NB_W-1:0]   num_batches,
  input  logic [ADDR_W-1:0] result_base,
  output logic              busy,
  output logic              done,
  // cycle counters
  output logic [31:0]       cyc_total,
  output logic [31:0]       cyc_im,
  output logic [31:0]       cyc_cam,
  output logic [31:0]       cyc_qla,
  output logic [31:0]       cyc_out,
  output logic [31:0]       bi_count,
  output logic [31:0]       beats_written,
  // external memory, read port
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [ADDR_W-1:0] mem_rd_addr,
  input  logic              mem_rd_rvalid,
  input  logic [W-1:0]      mem_rd_rdata,
  // external memory, write port
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output logic [W-1:0]      mem_wr_data
);

  localparam int unsigned CAM_AW  = $clog2(N * M / W);
  localparam int unsigned IM_WAW  = $clog2(IM_DEPTH / (W / INSTR_W));
  localparam int unsigned IM_RAW  = $clog2(IM_DEPTH);
  localparam int unsigned CNT_W   = 16;

  // sequencer <-> DMA
  logic              rd_start, rd_to_cam, rd_clr, rd_done, wr_init;
  logic [ADDR_W-1:0] rd_base, wr_base;
  logic [CNT_W-1:0]  rd_beats;
  // IM
  logic              im_we, im_re;
  logic [IM_WAW-1:0] im_waddr;
  logic [W-1:0]      im_wdata;
  logic [IM_RAW-1:0] im_raddr;
  instr_t            im_rdata;
  // R-CAM
  logic              cam_we, cam_wr_bit, cam_re;
  logic [CAM_AW-1:0] cam_addr;
  logic [W-1:0]      cam_data;
  logic [M-1:0]      cam_key;
  logic [N-1:0]      cam_bi;
  // QLA
  logic              qla_valid, qla_ready, qla_streaming;
  op_t               qla_op;
  logic              fifo_valid, fifo_pop;
  logic [W-1:0]      fifo_data;
  phase_e            phase;
  logic              eq_taken;

  bic_ctrl #(
    .N(N), .M(M), .W(W), .IM_DEPTH(IM_DEPTH), .ADDR_W(ADDR_W),
    .NB_W(NB_W), .CNT_W(CNT_W)
  ) u_ctrl (
    .clk, .rst_n,
    .start, .instr_base, .num_instr, .data_base, .num_batches, .result_base,
    .busy, .done, .phase,
    .rd_start, .rd_to_cam, .rd_clr, .rd_base, .rd_beats, .rd_done,
    .wr_init, .wr_base,
    .im_re, .im_raddr, .im_rdata,
    .cam_re, .cam_key,
    .qla_valid, .qla_op, .qla_ready, .qla_streaming,
    .fifo_empty(!fifo_valid)
  );

  dma #(
    .W(W), .ADDR_W(ADDR_W), .CNT_W(CNT_W), .IM_WAW(IM_WAW),
    .CAM_AW(CAM_AW), .MAX_OUT(MAX_OUT)
  ) u_dma (
    .clk, .rst_n,
    .rd_start, .rd_to_cam, .rd_clr, .rd_base, .rd_beats, .rd_busy(), .rd_done,
    .wr_init, .wr_base, .wr_count(beats_written),
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr, .mem_rd_rvalid, .mem_rd_rdata,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .im_we, .im_waddr, .im_wdata,
    .cam_we, .cam_wr_bit, .cam_addr, .cam_data,
    .fifo_valid, .fifo_data, .fifo_pop
  );

  im #(.DEPTH(IM_DEPTH), .W(W)) u_im (
    .clk,
    .we(im_we), .waddr(im_waddr), .wdata(im_wdata),
    .re(im_re), .raddr(im_raddr), .rdata(im_rdata)
  );

  rcam #(.N(N), .M(M), .W(W)) u_rcam (
    .clk,
    .we(cam_we), .wr_bit(cam_wr_bit), .addr(cam_addr), .data(cam_data),
    .re(cam_re), .key(cam_key), .bi(cam_bi)
  );

  qla #(.N(N), .W(W), .FIFO_DEPTH(FIFO_DEPTH)) u_qla (
    .clk, .rst_n,
    .in_valid(qla_valid), .in_ready(qla_ready), .in_op(qla_op), .in_bi(cam_bi),
    .out_valid(fifo_valid), .out_data(fifo_data), .out_pop(fifo_pop),
    .streaming(qla_streaming), .fifo_full(), .fifo_count()
  );

  assign eq_taken = qla_valid && qla_ready && (decode_op(qla_op) == ACT_EQ);

  perf_counters #(.CW(32)) u_perf (
    .clk, .rst_n,
    .start, .busy, .phase, .streaming(qla_streaming), .eq_taken,
    .cyc_total, .cyc_im, .cyc_cam, .cyc_qla, .cyc_out, .bi_count
  );

endmodule
