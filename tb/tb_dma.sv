// tb_dma: self-checking test of the three-channel DMA with the behavioural
// memory model.
//
// Read channels: an instruction job and R-CAM load and clear jobs are run
// against a memory filled with random beats; every beat the DMA passes on
// must carry the right row/beat number, the memory contents of base+number,
// and the right load/clear flag, in order and without gaps.  A job of zero
// beats must finish at once.  With a memory that never stalls a 64-beat job
// must stream at one beat per cycle (done within 64 + latency + 3 cycles);
// with a stalling memory the jobs must still complete correctly.
// Write channel: beats offered by a FIFO model must land at consecutive
// addresses from the programmed base, under random write stalls, and the
// written-beat counter must match.
//
// Follows the paper: one 256-bit beat per cycle.  Own choice: the memory
// handshake being exercised.
module tb_dma;
  localparam int unsigned W = 256, AW = 25, LAT = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           rd_start, rd_to_cam, rd_clr, rd_busy, rd_done, wr_init;
  logic [AW-1:0]  rd_base, wr_base;
  logic [15:0]    rd_beats;
  logic [31:0]    wr_count;
  logic           mem_rd_valid, mem_rd_ready, mem_rd_rvalid;
  logic [AW-1:0]  mem_rd_addr, mem_wr_addr;
  logic [W-1:0]   mem_rd_rdata, mem_wr_data;
  logic           mem_wr_valid, mem_wr_ready;
  logic           im_we, cam_we, cam_wr_bit, fifo_valid, fifo_pop;
  logic [8:0]     im_waddr;
  logic [10:0]    cam_addr;
  logic [W-1:0]   im_wdata, cam_data, fifo_data;
  int unsigned    rd_stall, wr_stall;

  dma #(.W(W), .ADDR_W(AW), .CNT_W(16), .IM_WAW(9), .CAM_AW(11), .MAX_OUT(8)) dut (.*);

  mem_model #(.W(W), .ADDR_W(AW), .DEPTH(4096), .LAT(LAT)) u_mem (
    .clk, .rd_stall_pct(rd_stall), .wr_stall_pct(wr_stall),
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_rvalid(mem_rd_rvalid), .rd_rdata(mem_rd_rdata),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data));

  int checks = 0, failures = 0;
  int exp_n, got_n, exp_base;
  logic exp_cam, exp_bit;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor of the IM / R-CAM write stream
  always @(posedge clk) begin
    if (rst_n && (im_we || cam_we)) begin
      checks++;
      if ((im_we && exp_cam) || (cam_we && !exp_cam)) begin
        failures++; $display("beat to the wrong destination");
      end else if (im_we && (im_waddr != 9'(got_n) || im_wdata != u_mem.mem[exp_base + got_n])) begin
        failures++; $display("IM beat %0d wrong", got_n);
      end else if (cam_we && (cam_addr != 11'(got_n) || cam_data != u_mem.mem[exp_base + got_n] ||
                              cam_wr_bit != exp_bit)) begin
        failures++; $display("CAM beat %0d wrong", got_n);
      end
      got_n++;
    end
  end

  task automatic job(input logic to_cam, input logic clr, input int base, input int beats,
                     input int max_cycles);
    int cyc;
    exp_cam = to_cam; exp_bit = !clr; exp_base = base; exp_n = beats; got_n = 0;
    @(negedge clk);
    rd_start = 1; rd_to_cam = to_cam; rd_clr = clr; rd_base = AW'(base); rd_beats = 16'(beats);
    @(negedge clk);
    rd_start = 0;
    cyc = 1;
    while (!rd_done) begin @(negedge clk); cyc++; end
    checks++;
    if (got_n != exp_n) begin failures++; $display("job got %0d beats, expected %0d", got_n, exp_n); end
    if (max_cycles > 0) begin
      checks++;
      if (cyc > max_cycles) begin failures++; $display("job took %0d cycles, limit %0d", cyc, max_cycles); end
    end
  endtask

  logic [W-1:0] fq [$];
  logic [W-1:0] sent [$];
  assign fifo_valid = fq.size() != 0;
  assign fifo_data  = fifo_valid ? fq[0] : '0;
  logic popq = 1'b0;
  always @(posedge clk) popq <= fifo_pop;
  always @(negedge clk) if (popq) void'(fq.pop_front());

  initial begin
    rd_start = 0; rd_to_cam = 0; rd_clr = 0; rd_base = 0; rd_beats = 0;
    wr_init = 0; wr_base = 0; rd_stall = 0; wr_stall = 0;
    exp_cam = 0; exp_bit = 1; exp_base = 0; exp_n = 0; got_n = 0;
    for (int i = 0; i < 4096; i++)
      for (int k = 0; k < 8; k++) u_mem.mem[i][32*k +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ideal memory: full rate
    job(1'b0, 1'b0, 100, 5, 5 + LAT + 3);
    job(1'b1, 1'b0, 500, 64, 64 + LAT + 3);
    job(1'b1, 1'b1, 500, 64, 64 + LAT + 3);
    job(1'b1, 1'b0, 7, 0, 3);
    // stalling memory
    rd_stall = 40;
    job(1'b0, 1'b0, 1000, 13, 0);
    job(1'b1, 1'b0, 1200, 200, 0);
    job(1'b1, 1'b1, 1200, 200, 0);
    // write channel
    wr_stall = 50;
    @(negedge clk); wr_init = 1; wr_base = AW'(3000);
    @(negedge clk); wr_init = 0;
    for (int i = 0; i < 40; i++) begin
      logic [W-1:0] v;
      for (int k = 0; k < 8; k++) v[32*k +: 32] = $urandom;
      fq.push_back(v); sent.push_back(v);
      if (i % 7 == 0) repeat (3) @(negedge clk);
    end
    while (fq.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < 40; i++) begin
      checks++;
      if (u_mem.mem[3000 + i] != sent[i]) begin failures++; $display("write beat %0d wrong", i); end
    end
    checks++;
    if (wr_count != 40) begin failures++; $display("wr_count %0d", wr_count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
