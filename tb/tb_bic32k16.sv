// tb_bic32k16: the bitmap index creator in its BIC32K16 configuration
// (32,768 16-bit words, N = 32768 and M = 16; every other parameter at its
// default), running the instruction sets used for that configuration on two
// full 64-KB batches.
//
// The data imitate a column with a few thousand distinct values: every
// 16-bit word is drawn from 0..2,047.  Three jobs, each with fresh data:
//   1. IS1: one OR of a random key of 0..2,047, then EQ;
//   2. IS2: 128 distinct keys from 0..255 ORed, then EQ (129 words);
//   3. IS3: 1,024 distinct keys from 0..4,095 ORed, then EQ (1,025 words).
// Each bitmap is 128 beats.  Every result beat of both batches is compared
// with bitmaps computed record by record (record r = 16-bit word r % 16 of
// beat r / 16), and the cycle counters with the timing model
// t_IM + B * (t_CAM + t_QLA + t_OUT), where t_CAM = 2 x 2,048 cycles and
// t_OUT = 128 cycles per bitmap, plus a fixed overhead per DMA job.
//
// Follows the paper: the configuration, the instruction sets and the timing
// model.  Own choice: the data distribution, key ranges, memory latency and
// address map.
module tb_bic32k16;
  import bic_pkg::*;
  localparam int unsigned N = 32768, M = 16, W = 256, AW = 25, NB = 2;
  localparam int unsigned BB = N * M / W;   // 2,048 beats per batch
  localparam int unsigned OB = N / W;       // 128 beats per bitmap
  localparam int unsigned LAT = 4;
  localparam int unsigned I_BASE = 0, D_BASE = 160, R_BASE = D_BASE + NB * BB;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start, busy, done;
  logic [AW-1:0]    instr_base, data_base, result_base;
  logic [12:0]      num_instr;
  logic [13:0]      num_batches;
  logic [31:0]      cyc_total, cyc_im, cyc_cam, cyc_qla, cyc_out, bi_count, beats_written;
  logic             mem_rd_valid, mem_rd_ready, mem_rd_rvalid, mem_wr_valid, mem_wr_ready;
  logic [AW-1:0]    mem_rd_addr, mem_wr_addr;
  logic [W-1:0]     mem_rd_rdata, mem_wr_data;
  int unsigned      rd_stall = 0, wr_stall = 0;

  bic_top #(.N(N), .M(M)) dut (.*);

  mem_model #(.W(W), .ADDR_W(AW), .DEPTH(8192), .LAT(LAT)) u_mem (
    .clk, .rd_stall_pct(rd_stall), .wr_stall_pct(wr_stall),
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_rvalid(mem_rd_rvalid), .rd_rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  int checks = 0, failures = 0;
  logic [31:0] prog [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_memory();
    for (int i = 0; i < 160; i++) u_mem.mem[I_BASE + i] = '0;
    foreach (prog[i]) u_mem.mem[I_BASE + i/8][32*(i%8) +: 32] = prog[i];
    for (int i = 0; i < NB * BB; i++)
      for (int k = 0; k < W/M; k++) u_mem.mem[D_BASE + i][M*k +: M] = M'($urandom % 2048);
  endtask

  // expected results: evaluate the program on every record
  task automatic check_results(input int n_eq);
    logic [W-1:0] exp_beats [];
    exp_beats = new[NB * n_eq * OB];
    foreach (exp_beats[i]) exp_beats[i] = '0;
    for (int r = 0; r < NB * N; r++) begin
      logic [15:0] v;
      logic       res;
      int         e;
      v = u_mem.mem[D_BASE + r / 16][(r % 16)*16 +: 16];
      res = 1'b0; e = (r / N) * n_eq;
      foreach (prog[i]) begin
        instr_t ins;
        ins = instr_t'(prog[i]);
        unique case (decode_op(ins.op))
          ACT_OR:  res = res | (v == ins.key);
          ACT_NOT: res = !res;
          ACT_EQ:  begin exp_beats[e*OB + (r%N)/W][r%W] = res; res = 1'b0; e++; end
          default: ;
        endcase
      end
    end
    foreach (exp_beats[i]) begin
      checks++;
      if (u_mem.mem[R_BASE + i] !== exp_beats[i]) begin
        failures++;
        if (failures < 10) $display("result beat %0d wrong", i);
      end
    end
    checks++;
    if (bi_count != 32'(NB * n_eq) || beats_written != 32'(NB * n_eq * OB)) begin
      failures++; $display("bi_count %0d beats_written %0d", bi_count, beats_written);
    end
  endtask

  task automatic run(input string name);
    int ni, ne, t_theo;
    ni = prog.size(); ne = 0;
    foreach (prog[i]) if (prog[i][2]) ne++;
    load_memory();
    for (int i = 0; i < NB * ne * OB; i++) u_mem.mem[R_BASE + i] = '1;
    @(negedge clk);
    start = 1; instr_base = AW'(I_BASE); data_base = AW'(D_BASE); result_base = AW'(R_BASE);
    num_instr = 13'(ni); num_batches = 14'(NB);
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    check_results(ne);
    t_theo = (ni * 32 + W - 1) / W + NB * (2 * BB + ni + ne * OB);
    $display("%s: %0d instructions, total %0d cycles (model %0d): im %0d cam %0d qla %0d out %0d; %0.3f Gwords/s at 100 MHz",
             name, ni, cyc_total, t_theo, cyc_im, cyc_cam, cyc_qla, cyc_out,
             real'(NB * N) / (real'(cyc_total) * 10.0));
    checks++;
    if (cyc_out != 32'(NB * ne * OB)) begin failures++; $display("t_OUT %0d", cyc_out); end
    checks++;
    if (cyc_cam < 32'(NB * 2 * BB) || cyc_cam > 32'(NB * 2 * (BB + LAT + 3))) begin failures++; $display("t_CAM %0d", cyc_cam); end
    checks++;
    if (cyc_total < 32'(t_theo) || cyc_total > 32'(t_theo + (2 * NB + 1) * (LAT + 4) + 4 * NB + 10)) begin
      failures++; $display("total %0d, model %0d", cyc_total, t_theo);
    end
  endtask

  initial begin
    int keys [$];
    start = 0; instr_base = 0; data_base = 0; result_base = 0; num_instr = 0; num_batches = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. IS1: one key of the data's range
    prog = {};
    prog.push_back({16'($urandom % 2048), 13'd0, 3'b001});
    prog.push_back(32'h00000004);
    run("IS1");
    // 2. IS2: 128 distinct keys of 0..255
    prog = {};
    for (int k = 0; k < 256; k++) keys.push_back(k);
    keys.shuffle();
    for (int i = 0; i < 128; i++) prog.push_back({16'(keys[i]), 13'd0, 3'b001});
    prog.push_back(32'h00000004);
    run("IS2");
    // 3. IS3: 1,024 distinct keys of 0..4,095
    prog = {}; keys = {};
    for (int k = 0; k < 4096; k++) keys.push_back(k);
    keys.shuffle();
    for (int i = 0; i < 1024; i++) prog.push_back({16'(keys[i]), 13'd0, 3'b001});
    prog.push_back(32'h00000004);
    run("IS3");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
