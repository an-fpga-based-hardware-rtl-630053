// tb_cu: self-checking test of the 32-word CAM unit at M = 16 (two 8-bit
// units and an AND per word), the unit width of the BIC32K16 configuration.
//
// Stores 32 random 16-bit words, several of which share a high or a low
// byte with others, so that a match in one byte lane alone must not report
// a hit.  Every stored value, values that differ in one byte only and random
// keys are searched; each 32-bit index is compared with a bitmap computed
// from the stored words.
//
// Follows the paper: the AND of byte-lane units.  Own choice: key values.
module tb_cu;
  logic        clk = 1'b0;
  logic        we, wr_bit, re;
  logic [4:0]  addr;
  logic [15:0] data, key;
  logic [31:0] index;
  int          checks = 0, failures = 0;
  logic [15:0] model [32];

  always #5 clk = ~clk;

  cu #(.M(16)) dut (.clk, .we, .wr_bit, .addr, .data, .re, .key, .index);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expect_idx(input logic [15:0] k);
    logic [31:0] v = '0;
    for (int j = 0; j < 32; j++) v[j] = (model[j] == k);
    return v;
  endfunction

  task automatic search(input logic [15:0] k);
    @(negedge clk);
    re = 1'b1; key = k;
    @(negedge clk);
    re = 1'b0;
    checks++;
    if (index !== expect_idx(k)) begin
      failures++;
      $display("key %h: index %h expected %h", k, index, expect_idx(k));
    end
  endtask

  initial begin
    we = 0; wr_bit = 0; re = 0; addr = 0; data = 0; key = 0;
    for (int j = 0; j < 32; j++) begin
      model[j] = 16'($urandom);
      if (j % 4 == 1) model[j][15:8] = model[j-1][15:8];  // same high byte
      if (j % 4 == 2) model[j][7:0]  = model[j-2][7:0];   // same low byte
      if (j == 31)    model[j]       = model[0];          // duplicate
      @(negedge clk);
      we = 1'b1; wr_bit = 1'b1; addr = 5'(j); data = model[j];
    end
    @(negedge clk); we = 1'b0;
    for (int j = 0; j < 32; j++) begin
      search(model[j]);
      search({model[j][15:8], model[(j+1)%32][7:0]});
      search({model[(j+3)%32][15:8], model[j][7:0]});
      search(16'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
