// tb_cb: self-checking test of one CU block at the default sizes (32 units
// of 8 bits on a 256-bit bus, 1,024 words).
//
// Loads 32 beats of random bytes (32 words per beat, one beat per cycle),
// then searches many keys and compares the 1,024-bit slice with the bitmap
// of the data in record order: record r = beat*32 + byte, so bit r must be
// set exactly when that byte equals the key.  This checks both the parallel
// load and the interleaved output order.  It then clears the block by
// sending the same beats with wr_bit = 0 and checks that every key finds
// nothing.
//
// Follows the paper: output order of Fig. 6 (bit j*32+k from unit k, bit j).
module tb_cb;
  localparam int unsigned M = 8, W = 256, C = W / M, NW = 32 * C;
  logic            clk = 1'b0;
  logic            we, wr_bit, re;
  logic [4:0]      addr;
  logic [W-1:0]    data;
  logic [M-1:0]    key;
  logic [NW-1:0]   bi;
  logic [W-1:0]    beats [32];
  int              checks = 0, failures = 0;

  always #5 clk = ~clk;

  cb #(.M(M), .W(W)) dut (.clk, .we, .wr_bit, .addr, .data, .re, .key, .bi);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [NW-1:0] expect_bi(input logic [M-1:0] k);
    logic [NW-1:0] v = '0;
    for (int r = 0; r < NW; r++) v[r] = (beats[r / C][(r % C)*M +: M] == k);
    return v;
  endfunction

  task automatic send(input logic bitv);
    for (int b = 0; b < 32; b++) begin
      @(negedge clk);
      we = 1'b1; wr_bit = bitv; addr = 5'(b); data = beats[b];
    end
    @(negedge clk); we = 1'b0;
  endtask

  task automatic search(input logic [M-1:0] k, input logic empty);
    @(negedge clk);
    re = 1'b1; key = k;
    @(negedge clk);
    re = 1'b0;
    checks++;
    if (bi !== (empty ? '0 : expect_bi(k))) begin
      failures++;
      $display("key %0d: slice mismatch", k);
    end
  endtask

  initial begin
    we = 0; wr_bit = 0; re = 0; addr = 0; data = 0; key = 0;
    for (int b = 0; b < 32; b++)
      for (int k = 0; k < C; k++) beats[b][k*M +: M] = M'($urandom % 40);  // small range: many hits
    send(1'b1);
    for (int k = 0; k < 48; k++) search(M'(k), 1'b0);
    send(1'b0);
    for (int k = 0; k < 48; k++) search(M'(k), 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
