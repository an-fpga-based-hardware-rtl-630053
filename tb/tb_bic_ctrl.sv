// tb_bic_ctrl: self-checking test of the sequencer on its own.
//
// The DMA, instruction memory and query logic array around it are simple
// behavioural responders: the DMA finishes a job some cycles after it was
// started, the IM returns program words one cycle after a read, and the
// QLA drops `ready` for several cycles after each EQ (and at random), as a
// result being moved out would.  The test checks
//   - the order of DMA jobs: instructions (ceil(Ni/8) beats) first, then
//     for every batch a load and a clear of the same N*M/W beats at
//     consecutive batch addresses;
//   - that every batch sees the whole program, in order, each instruction
//     handed to the QLA exactly once with the operation of its word, and
//     the R-CAM searched with its key in the cycle before;
//   - that a stall holds the pipeline (no instruction lost or doubled);
//   - a single done pulse at the end, after the FIFO is empty.
//
// Follows the paper: IM loaded once before the batches, one instruction per
// cycle.  Own choice being checked: clear right after each batch's program.
module tb_bic_ctrl;
  import bic_pkg::*;
  localparam int unsigned N = 2048, M = 8, W = 256, IMD = 64, AW = 25, BB = N * M / W;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start, busy, done;
  logic [AW-1:0]     instr_base, data_base, result_base;
  logic [6:0]        num_instr;
  logic [13:0]       num_batches;
  phase_e            phase;
  logic              rd_start, rd_to_cam, rd_clr, rd_done, wr_init;
  logic [AW-1:0]     rd_base, wr_base;
  logic [15:0]       rd_beats;
  logic              im_re, cam_re, qla_valid, qla_ready, qla_streaming, fifo_empty;
  logic [5:0]        im_raddr;
  instr_t            im_rdata;
  logic [M-1:0]      cam_key;
  op_t               qla_op;

  bic_ctrl #(.N(N), .M(M), .W(W), .IM_DEPTH(IMD), .ADDR_W(AW), .NB_W(14), .CNT_W(16)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] prog [IMD];
  int ni, nb;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- DMA responder and job log ----
  typedef struct { logic to_cam; logic clr; int base; int beats; } job_t;
  job_t jobs [$];
  int   dma_left = -1;
  always @(posedge clk) begin
    rd_done <= 1'b0;
    if (rst_n && rd_start) begin
      jobs.push_back('{rd_to_cam, rd_clr, int'(rd_base), int'(rd_beats)});
      dma_left <= int'(rd_beats) + 3;
    end else if (dma_left > 0) dma_left <= dma_left - 1;
    else if (dma_left == 0) begin rd_done <= 1'b1; dma_left <= -1; end
  end

  // ---- IM model ----
  always @(posedge clk) if (im_re) im_rdata <= instr_t'(prog[im_raddr]);

  // ---- R-CAM key log and QLA responder ----
  logic [M-1:0] key_q;
  logic         key_v;
  int           qla_hold = 0;
  int           seen [$];      // instruction words taken by the QLA
  int           n_stall = 0;
  always @(posedge clk) begin
    if (cam_re) begin key_q <= cam_key; key_v <= 1'b1; end
    if (rst_n && qla_valid && qla_ready) begin
      seen.push_back({key_q, 13'd0, qla_op});
      if (qla_op.eq) qla_hold <= 5;
    end else if (qla_hold > 0) qla_hold <= qla_hold - 1;
    if (rst_n && qla_valid && !qla_ready) n_stall++;
  end
  always @(negedge clk) begin
    qla_streaming = (qla_hold > 0);
    qla_ready     = (qla_hold == 0) && (($urandom % 100) >= 20);
    fifo_empty    = (phase != PH_DRAIN) || (($urandom % 4) == 0);
  end

  int n_done = 0;
  always @(posedge clk) if (rst_n && done) n_done++;

  initial begin
    int ib, db, k;
    start = 0; instr_base = 0; data_base = 0; result_base = 0; num_instr = 0; num_batches = 0;
    key_v = 0; key_q = 0; qla_ready = 1; qla_streaming = 0; fifo_empty = 1;
    ni = 21; nb = 3; ib = 40; db = 1000;
    for (int i = 0; i < IMD; i++) prog[i] = '0;
    for (int i = 0; i < ni; i++) begin
      k = $urandom % 256;
      prog[i] = {16'(k), 13'd0, (i % 5 == 4) ? 3'b100 : (i % 7 == 3) ? 3'b010 : 3'b001};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; instr_base = AW'(ib); data_base = AW'(db); result_base = AW'(5000);
    num_instr = 7'(ni); num_batches = 14'(nb);
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (5) @(negedge clk);
    // job order
    checks++;
    foreach (jobs[j]) $display("job %0d: cam=%b clr=%b base=%0d beats=%0d", j, jobs[j].to_cam, jobs[j].clr, jobs[j].base, jobs[j].beats);
    if (jobs.size() != 1 + 2 * nb) begin failures++; $display("%0d jobs", jobs.size()); end
    else begin
      checks++;
      if (jobs[0].to_cam || jobs[0].base != ib || jobs[0].beats != (ni + 7) / 8) begin
        failures++; $display("instruction job wrong");
      end
      for (int b = 0; b < nb; b++) begin
        checks++;
        if (!jobs[1+2*b].to_cam || jobs[1+2*b].clr || jobs[1+2*b].base != db + b*BB || jobs[1+2*b].beats != BB ||
            !jobs[2+2*b].to_cam || !jobs[2+2*b].clr || jobs[2+2*b].base != db + b*BB || jobs[2+2*b].beats != BB) begin
          failures++; $display("batch %0d jobs wrong", b);
        end
      end
    end
    // instruction stream
    checks++;
    if (seen.size() != ni * nb) begin failures++; $display("%0d instructions seen, expected %0d", seen.size(), ni*nb); end
    else
      for (int i = 0; i < ni * nb; i++) begin
        logic [31:0] e;
        e = prog[i % ni];
        checks++;
        if (seen[i] != {e[31:16] & 16'hFF, 13'd0, e[2:0]}) begin
          failures++; $display("instruction %0d: %h expected %h", i, seen[i], e);
        end
      end
    checks++;
    if (n_done != 1 || busy) begin failures++; $display("done pulses %0d busy %b", n_done, busy); end
    checks++;
    if (n_stall == 0) begin failures++; $display("no stall happened"); end
    $display("stall cycles %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
