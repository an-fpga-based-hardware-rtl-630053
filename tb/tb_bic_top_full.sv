// tb_bic_top_full: the bitmap index creator at its default size (BIC64K8:
// 65,536 8-bit words, 256-bit bus, 4,096-entry instruction memory), run on
// one full 64-KB batch.
//
// Four runs on the same memory image, each with a fresh batch of random
// bytes:
//   1. point index: {OR key, EQ}, two instructions (instruction set IS1);
//   2. range index: 128 distinct keys ORed, then EQ, 129 instructions (IS2);
//   3. the example query Age != {10, 17, 29} in its hexadecimal form,
//      followed by the range Age <= 10;
//   4. the full index of the batch: OR k, EQ for each of the 256 keys,
//      512 instructions and 256 bitmaps (65,536 result beats).
// Every result beat is compared with bitmaps computed here from the data,
// record by record.  The cycle counters are compared with the timing model
// t_IM + t_CAM + t_QLA + t_OUT, with a memory that never stalls: t_CAM must
// be 2 x 2,048 cycles plus the memory latency of each DMA job, t_OUT 256
// cycles per bitmap, and the total may exceed the model only by a fixed
// handshake overhead.  The indexing rate at 100 MHz is printed.
//
// Follows the paper: sizes, instruction sets IS1/IS2 and the timing model.
// Own choice: memory latency, address map and random data.  No parameter
// of the design is overridden.
module tb_bic_top_full;
  import bic_pkg::*;
  localparam int unsigned N = 65536, M = 8, W = 256, AW = 25;
  localparam int unsigned BB = N * M / W;   // 2,048 beats per batch
  localparam int unsigned OB = N / W;       // 256 beats per bitmap
  localparam int unsigned LAT = 4;
  localparam int unsigned I_BASE = 0, D_BASE = 512, R_BASE = 4096;

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

  bic_top dut (.*);

  mem_model #(.W(W), .ADDR_W(AW), .DEPTH(131072), .LAT(LAT)) u_mem (
    .clk, .rd_stall_pct(rd_stall), .wr_stall_pct(wr_stall),
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_rvalid(mem_rd_rvalid), .rd_rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  int checks = 0, failures = 0;
  logic [31:0] prog [$];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_memory();
    for (int i = 0; i < 32; i++) u_mem.mem[I_BASE + i] = '0;
    foreach (prog[i]) u_mem.mem[I_BASE + i/8][32*(i%8) +: 32] = prog[i];
    for (int i = 0; i < BB; i++)
      for (int k = 0; k < W/32; k++) u_mem.mem[D_BASE + i][32*k +: 32] = $urandom;
  endtask

  // expected results: evaluate the program on every record
  task automatic check_results(input int n_eq);
    logic [W-1:0] exp_beats [];
    exp_beats = new[n_eq * OB];
    foreach (exp_beats[i]) exp_beats[i] = '0;
    for (int r = 0; r < N; r++) begin
      logic [7:0] v;
      logic       res;
      int         e;
      v = u_mem.mem[D_BASE + r / 32][(r % 32)*8 +: 8];
      res = 1'b0; e = 0;
      foreach (prog[i]) begin
        instr_t ins;
        ins = instr_t'(prog[i]);
        unique case (decode_op(ins.op))
          ACT_OR:  res = res | (v == ins.key[7:0]);
          ACT_NOT: res = !res;
          ACT_EQ:  begin exp_beats[e*OB + r/W][r%W] = res; res = 1'b0; e++; end
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
    if (bi_count != 32'(n_eq) || beats_written != 32'(n_eq * OB)) begin
      failures++; $display("bi_count %0d beats_written %0d", bi_count, beats_written);
    end
  endtask

  task automatic run(input string name);
    int ni, ne, t_theo;
    ni = prog.size(); ne = 0;
    foreach (prog[i]) if (prog[i][2]) ne++;
    load_memory();
    for (int i = 0; i < ne * OB; i++) u_mem.mem[R_BASE + i] = '1;
    @(negedge clk);
    start = 1; instr_base = AW'(I_BASE); data_base = AW'(D_BASE); result_base = AW'(R_BASE);
    num_instr = 13'(ni); num_batches = 14'd1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    check_results(ne);
    t_theo = (ni * 32 + W - 1) / W + 2 * BB + ni + ne * OB;
    $display("%s: %0d instructions, total %0d cycles (model %0d): im %0d cam %0d qla %0d out %0d; %0.3f Gwords/s at 100 MHz",
             name, ni, cyc_total, t_theo, cyc_im, cyc_cam, cyc_qla, cyc_out,
             real'(N) / (real'(cyc_total) * 10.0));
    checks++;
    if (cyc_out != 32'(ne * OB)) begin failures++; $display("t_OUT %0d", cyc_out); end
    checks++;
    if (cyc_cam < 32'(2 * BB) || cyc_cam > 32'(2 * (BB + LAT + 3))) begin failures++; $display("t_CAM %0d", cyc_cam); end
    checks++;
    if (cyc_total < 32'(t_theo) || cyc_total > 32'(t_theo + 3 * (LAT + 4) + 10)) begin
      failures++; $display("total %0d, model %0d", cyc_total, t_theo);
    end
  endtask

  initial begin
    int keys [$];
    start = 0; instr_base = 0; data_base = 0; result_base = 0; num_instr = 0; num_batches = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1. point index (IS1)
    prog = {};
    prog.push_back({16'($urandom % 256), 13'd0, 3'b001});
    prog.push_back(32'h00000004);
    run("IS1");
    // 2. range index of 128 distinct keys (IS2)
    prog = {};
    for (int k = 0; k < 256; k++) keys.push_back(k);
    keys.shuffle();
    for (int i = 0; i < 128; i++) prog.push_back({16'(keys[i]), 13'd0, 3'b001});
    prog.push_back(32'h00000004);
    run("IS2");
    // 3. Age != {10, 17, 29}, then Age <= 10
    prog = {};
    prog.push_back(32'h000A0001); prog.push_back(32'h00110001); prog.push_back(32'h001D0001);
    prog.push_back(32'h00000002); prog.push_back(32'h00000004);
    for (int k = 0; k <= 10; k++) prog.push_back({16'(k), 13'd0, 3'b001});
    prog.push_back(32'h00000004);
    run("example");
    // 4. full index of the batch: {OR k, EQ} for every key k, 512 words
    prog = {};
    for (int k = 0; k < 256; k++) begin
      prog.push_back({16'(k), 13'd0, 3'b001});
      prog.push_back(32'h00000004);
    end
    run("full index");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
