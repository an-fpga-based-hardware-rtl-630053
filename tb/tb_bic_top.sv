// tb_bic_top: end-to-end test of the bitmap index creator at reduced size.
//
// The accelerator is built with 2,048 8-bit R-CAM words (2 CU blocks), a
// 64-entry instruction memory and a 4-beat result FIFO; bus width and all
// logic are as in the full design.  External memory is the behavioural
// model.  The testbench writes the instructions and three batches of
// random bytes into the model, starts a run and, when done, compares every
// result beat in memory with bitmaps it computes itself from the data and
// the program.
//
// The program contains the example query Age != {10, 17, 29} in the
// hexadecimal form given for it (000A0001 00110001 001D0001 00000002
// 00000004), a point index, a range index (key <= 10), a NO on an empty
// result and a NO with the OR bit also set, so OR, NO and EQ, the pipeline
// stall behind EQ, multi-batch runs and the R-CAM clear are all used.
//
// Run 1 uses a memory that never stalls and checks the cycle counters
// against the timing model: t_OUT = B*E*N/W exactly, t_QLA = B*Ni plus at
// most a 3-cycle pipeline fill per batch, t_CAM = B*2*N*M/W plus the memory
// latency per job, and a total that exceeds the model only by a fixed
// handshake and latency overhead per DMA job and per batch.  Run 2 repeats with
// new data, random read and write stalls, which must make the FIFO fill up
// and stall the output.  Each mechanism is counted and one that never
// happened is a failure.
//
// Follows the paper: instruction format, the example program, the timing
// model of the evaluation.  Own choice: reduced sizes and the overhead bound.
module tb_bic_top;
  import bic_pkg::*;
  localparam int unsigned N = 2048, M = 8, W = 256, IMD = 64, FD = 4, AW = 25;
  localparam int unsigned BB = N * M / W;     // beats per batch
  localparam int unsigned OB = N / W;         // beats per bitmap
  localparam int unsigned LAT = 4;
  localparam int unsigned NB = 3;
  localparam int unsigned I_BASE = 0, D_BASE = 64, R_BASE = 1024;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start, busy, done;
  logic [AW-1:0]    instr_base, data_base, result_base;
  logic [6:0]       num_instr;
  logic [13:0]      num_batches;
  logic [31:0]      cyc_total, cyc_im, cyc_cam, cyc_qla, cyc_out, bi_count, beats_written;
  logic             mem_rd_valid, mem_rd_ready, mem_rd_rvalid, mem_wr_valid, mem_wr_ready;
  logic [AW-1:0]    mem_rd_addr, mem_wr_addr;
  logic [W-1:0]     mem_rd_rdata, mem_wr_data;
  int unsigned      rd_stall, wr_stall;

  bic_top #(.N(N), .M(M), .W(W), .IM_DEPTH(IMD), .FIFO_DEPTH(FD), .ADDR_W(AW)) dut (.*);

  mem_model #(.W(W), .ADDR_W(AW), .DEPTH(4096), .LAT(LAT)) u_mem (
    .clk, .rd_stall_pct(rd_stall), .wr_stall_pct(wr_stall),
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_rvalid(mem_rd_rvalid), .rd_rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  int checks = 0, failures = 0;
  // mechanism counters
  int n_or = 0, n_no = 0, n_eq = 0, n_eq_stall = 0, n_fifo_full = 0;
  int n_rd_stall = 0, n_wr_stall = 0, n_clear = 0, n_batch = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (dut.qla_valid && dut.qla_ready) begin
      unique case (decode_op(dut.qla_op))
        ACT_OR:  n_or++;
        ACT_NOT: n_no++;
        ACT_EQ:  n_eq++;
        default: ;
      endcase
    end
    if (dut.qla_valid && !dut.qla_ready) n_eq_stall++;
    if (dut.qla_streaming && dut.u_qla.fifo_full) n_fifo_full++;
    if (mem_rd_valid && !mem_rd_ready) n_rd_stall++;
    if (mem_wr_valid && !mem_wr_ready) n_wr_stall++;
    if (dut.rd_start && dut.rd_clr) n_clear++;
    if (dut.rd_start && dut.rd_to_cam && !dut.rd_clr) n_batch++;
  end

  logic [31:0] prog [$];

  task automatic build_program();
    prog = {};
    // Age != {10, 17, 29}: the hexadecimal program of the example
    prog.push_back(32'h000A0001); prog.push_back(32'h00110001); prog.push_back(32'h001D0001);
    prog.push_back(32'h00000002); prog.push_back(32'h00000004);
    // point index of key 5
    prog.push_back({16'd5, 13'd0, 3'b001}); prog.push_back(32'h00000004);
    // range index key <= 10
    for (int k = 0; k <= 10; k++) prog.push_back({16'(k), 13'd0, 3'b001});
    prog.push_back(32'h00000004);
    // NO of an empty result gives all ones; then OR+NO in one word acts as OR
    prog.push_back(32'h00000002); prog.push_back(32'h00000004);
    prog.push_back({16'd3, 13'd0, 3'b011}); prog.push_back(32'h00000004);
  endtask

  function automatic logic [7:0] rec(input int b, input int r);
    return u_mem.mem[D_BASE + b*BB + r / (W/M)][(r % (W/M))*M +: M];
  endfunction

  task automatic load_memory();
    for (int i = 0; i < IMD / 8; i++) u_mem.mem[I_BASE + i] = '0;
    foreach (prog[i]) u_mem.mem[I_BASE + i/8][32*(i%8) +: 32] = prog[i];
    for (int b = 0; b < NB; b++)
      for (int i = 0; i < BB; i++)
        for (int k = 0; k < W/32; k++) u_mem.mem[D_BASE + b*BB + i][32*k +: 32] = $urandom % 32'h20202020;
    for (int i = 0; i < 512; i++) u_mem.mem[R_BASE + i] = '1;
  endtask

  task automatic check_results();
    int e = 0;
    for (int b = 0; b < NB; b++) begin
      logic [N-1:0] res = '0;
      foreach (prog[i]) begin
        instr_t ins = instr_t'(prog[i]);
        logic [N-1:0] bi;
        for (int r = 0; r < N; r++) bi[r] = (rec(b, r) == ins.key[M-1:0]);
        unique case (decode_op(ins.op))
          ACT_OR:  res = res | bi;
          ACT_NOT: res = ~res;
          ACT_EQ: begin
            for (int o = 0; o < OB; o++) begin
              checks++;
              if (u_mem.mem[R_BASE + e*OB + o] !== res[o*W +: W]) begin
                failures++; $display("batch %0d bitmap %0d beat %0d wrong", b, e, o);
              end
            end
            res = '0; e++;
          end
          default: ;
        endcase
      end
    end
    checks++;
    if (bi_count != 32'(e) || beats_written != 32'(e * OB)) begin
      failures++; $display("bi_count %0d beats_written %0d, expected %0d %0d", bi_count, beats_written, e, e*OB);
    end
  endtask

  task automatic run();
    int cyc = 0;
    @(negedge clk);
    start = 1; instr_base = AW'(I_BASE); data_base = AW'(D_BASE); result_base = AW'(R_BASE);
    num_instr = 7'(prog.size()); num_batches = 14'(NB);
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int ni, ne, t_theo;
    start = 0; instr_base = 0; data_base = 0; result_base = 0; num_instr = 0; num_batches = 0;
    rd_stall = 0; wr_stall = 0;
    build_program();
    ni = prog.size(); ne = 0;
    foreach (prog[i]) if (prog[i][2]) ne++;
    load_memory();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- run 1: ideal memory, timing ----
    run();
    check_results();
    t_theo = (ni * 32 + W - 1) / W + NB * (2 * BB + ni + ne * OB);
    $display("run 1: total %0d (model %0d)  im %0d  cam %0d  qla %0d  out %0d",
             cyc_total, t_theo, cyc_im, cyc_cam, cyc_qla, cyc_out);
    checks++;
    if (cyc_out != 32'(NB * ne * OB)) begin failures++; $display("t_OUT %0d expected %0d", cyc_out, NB*ne*OB); end
    checks++;
    if (cyc_qla < 32'(NB * ni) || cyc_qla > 32'(NB * (ni + 3))) begin failures++; $display("t_QLA %0d", cyc_qla); end
    checks++;
    if (cyc_cam < 32'(NB * 2 * BB) || cyc_cam > 32'(NB * 2 * (BB + LAT + 3))) begin failures++; $display("t_CAM %0d", cyc_cam); end
    checks++;
    if (cyc_total < 32'(t_theo) || cyc_total > 32'(t_theo + (2*NB + 1) * (LAT + 4) + 4*NB + 10)) begin failures++; $display("total %0d", cyc_total); end
    // ---- run 2: stalling memory, new data ----
    load_memory();
    rd_stall = 30; wr_stall = 70;
    run();
    check_results();
    $display("run 2: total %0d cycles", cyc_total);
    $display("OR=%0d NO=%0d EQ=%0d eq-stall=%0d fifo-full=%0d rd-stall=%0d wr-stall=%0d clears=%0d loads=%0d",
             n_or, n_no, n_eq, n_eq_stall, n_fifo_full, n_rd_stall, n_wr_stall, n_clear, n_batch);
    checks++;
    if (n_or == 0 || n_no == 0 || n_eq == 0 || n_eq_stall == 0 || n_fifo_full == 0 ||
        n_rd_stall == 0 || n_wr_stall == 0 || n_clear == 0 || n_batch < 2 * NB) begin
      failures++; $display("a mechanism never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
