// tb_rcam: self-checking test of the bit-sliced R-CAM in both word widths.
//
// Instance A is an 8-bit R-CAM of 4,096 words (4 CU blocks), instance B a
// 16-bit R-CAM of 2,048 words (4 blocks of 16 units, the BIC32K16 layout).
// For each: load a batch at one beat per cycle, search keys and compare the
// full bitmap with one computed from the batch in record order (record r is
// word r % C of beat r / C); then clear the batch by sending it again with
// wr_bit = 0, load a second batch and check again, which shows that the
// clear removed every old entry.  The one-cycle search latency is checked by
// sampling the output on the edge right after the request.
//
// Follows the paper: bit-sliced loading and record order, the 16-bit
// layout.  Own choice: reduced word counts.
module tb_rcam;
  localparam int unsigned W = 256;
  localparam int unsigned NA = 4096, MA = 8,  CA = W / MA, BA = NA / CA;
  localparam int unsigned NB = 2048, MB = 16, CB = W / MB, BB = NB / CB;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                   a_we, a_bit, a_re;
  logic [$clog2(BA)-1:0]  a_addr;
  logic [W-1:0]           a_data;
  logic [MA-1:0]          a_key;
  logic [NA-1:0]          a_bi;
  logic                   b_we, b_bit, b_re;
  logic [$clog2(BB)-1:0]  b_addr;
  logic [W-1:0]           b_data;
  logic [MB-1:0]          b_key;
  logic [NB-1:0]          b_bi;

  rcam #(.N(NA), .M(MA), .W(W)) dut_a (.clk, .we(a_we), .wr_bit(a_bit), .addr(a_addr),
    .data(a_data), .re(a_re), .key(a_key), .bi(a_bi));
  rcam #(.N(NB), .M(MB), .W(W)) dut_b (.clk, .we(b_we), .wr_bit(b_bit), .addr(b_addr),
    .data(b_data), .re(b_re), .key(b_key), .bi(b_bi));

  logic [W-1:0] da [BA];
  logic [W-1:0] db [BB];
  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(input int range_a, input int range_b);
    for (int b = 0; b < BA; b++)
      for (int k = 0; k < CA; k++) da[b][k*MA +: MA] = MA'($urandom % range_a);
    for (int b = 0; b < BB; b++)
      for (int k = 0; k < CB; k++) db[b][k*MB +: MB] = MB'(($urandom % range_b) * 257);
  endtask

  task automatic send(input logic bitv);
    for (int b = 0; b < BA || b < BB; b++) begin
      @(negedge clk);
      a_we = (b < BA); a_bit = bitv; a_addr = ($clog2(BA))'(b); a_data = da[b % BA];
      b_we = (b < BB); b_bit = bitv; b_addr = ($clog2(BB))'(b); b_data = db[b % BB];
    end
    @(negedge clk); a_we = 0; b_we = 0;
  endtask

  task automatic search(input int ka, input int kb);
    logic [NA-1:0] ea;
    logic [NB-1:0] eb;
    for (int r = 0; r < NA; r++) ea[r] = (da[r / CA][(r % CA)*MA +: MA] == MA'(ka));
    for (int r = 0; r < NB; r++) eb[r] = (db[r / CB][(r % CB)*MB +: MB] == MB'(kb));
    @(negedge clk);
    a_re = 1; a_key = MA'(ka); b_re = 1; b_key = MB'(kb);
    @(posedge clk); #1;
    a_re = 0; b_re = 0;
    checks += 2;
    if (a_bi !== ea) begin failures++; $display("8-bit key %0d mismatch", ka); end
    if (b_bi !== eb) begin failures++; $display("16-bit key %0d mismatch", kb); end
  endtask

  initial begin
    a_we = 0; a_bit = 0; a_re = 0; a_addr = 0; a_data = 0; a_key = 0;
    b_we = 0; b_bit = 0; b_re = 0; b_addr = 0; b_data = 0; b_key = 0;
    fill(64, 40);
    send(1'b1);
    for (int k = 0; k < 70; k++) search(k, (k % 45) * 257);
    send(1'b0);                 // clear the old batch
    fill(256, 256);
    send(1'b1);
    for (int k = 0; k < 70; k++) search($urandom % 256, ($urandom % 256) * 257);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
