// tb_cu8: self-checking test of the 32x8-bit CAM unit.
//
// Stores 32 random byte values, then searches every one of the 256 keys and
// compares the 32-bit index with a bitmap worked out from the stored values
// (bit j set when word j equals the key).  It then clears half of the words
// by rewriting them with wr_bit = 0, stores new values in their place and
// checks all keys again.  The search latency (result on the clock edge
// after re) and the hold of the output while re is low are checked too.
//
// Follows the paper: CAM function of the unit.  Own choice: the clear-by-
// rewrite with wr_bit = 0 and the one-cycle latency being checked.
module tb_cu8;
  logic        clk = 1'b0;
  logic        we, wr_bit, re;
  logic [4:0]  addr;
  logic [7:0]  data, key;
  logic [31:0] index;
  int          checks = 0, failures = 0;
  logic [7:0]  model [32];

  always #5 clk = ~clk;

  cu8 dut (.clk, .we, .wr_bit, .addr, .data, .re, .key, .index);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_word(input logic [4:0] a, input logic [7:0] d, input logic bitv);
    @(negedge clk);
    we = 1'b1; wr_bit = bitv; addr = a; data = d;
    @(negedge clk);
    we = 1'b0;
  endtask

  function automatic logic [31:0] expect_idx(input logic [7:0] k);
    logic [31:0] v = '0;
    for (int j = 0; j < 32; j++) v[j] = (model[j] == k);
    return v;
  endfunction

  task automatic search_all();
    for (int k = 0; k < 256; k++) begin
      @(negedge clk);
      re = 1'b1; key = 8'(k);
      @(negedge clk);
      re = 1'b0;
      checks++;
      if (index !== expect_idx(8'(k))) begin
        failures++;
        $display("key %0d: index %h expected %h", k, index, expect_idx(8'(k)));
      end
    end
  endtask

  initial begin
    we = 0; wr_bit = 0; re = 0; addr = 0; data = 0; key = 0;
    for (int j = 0; j < 32; j++) begin
      model[j] = 8'($urandom);
      if (j == 5) model[j] = model[2];   // force a duplicate value
      write_word(5'(j), model[j], 1'b1);
    end
    search_all();
    // hold: output keeps the last result while re is low
    @(negedge clk); re = 1'b1; key = model[2];
    @(negedge clk); re = 1'b0; key = model[3];
    repeat (3) @(negedge clk);
    checks++;
    if (index !== expect_idx(model[2])) begin failures++; $display("hold failed"); end
    // clear even words and store new values there
    for (int j = 0; j < 32; j += 2) begin
      write_word(5'(j), model[j], 1'b0);
      model[j] = 8'($urandom);
      write_word(5'(j), model[j], 1'b1);
    end
    search_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
