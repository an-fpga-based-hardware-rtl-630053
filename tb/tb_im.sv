// tb_im: self-checking test of the instruction memory at its default size.
//
// Writes all 512 rows of eight instructions (one bus beat per cycle) with
// random words, then reads 4,096 instructions in random order and checks
// each against the word it was written as (instruction n = bits 32*(n%8)
// of row n/8), including the field split of the instruction struct
// (key in bits 31..16, operation in bits 2..0).  Read latency is one cycle.
//
// Follows the paper: 4,096 x 32 bits, eight per beat.  Own choice: the
// order of instructions within a beat.
module tb_im;
  import bic_pkg::*;
  logic          clk = 1'b0;
  logic          we, re;
  logic [8:0]    waddr;
  logic [255:0]  wdata;
  logic [11:0]   raddr;
  instr_t        rdata;
  logic [31:0]   model [4096];
  int            checks = 0, failures = 0;

  always #5 clk = ~clk;

  im dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; wdata = 0; raddr = 0;
    for (int n = 0; n < 4096; n++) model[n] = $urandom;
    for (int r = 0; r < 512; r++) begin
      @(negedge clk);
      we = 1; waddr = 9'(r);
      for (int k = 0; k < 8; k++) wdata[32*k +: 32] = model[r*8 + k];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 4096; i++) begin
      int n;
      n = (i * 1103) % 4096;
      @(negedge clk);
      re = 1; raddr = 12'(n);
      @(posedge clk); #1;
      re = 0;
      checks++;
      if (rdata !== model[n] || rdata.key !== model[n][31:16] || rdata.op.eq !== model[n][2]) begin
        failures++;
        $display("instr %0d: %h expected %h", n, rdata, model[n]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
