// tb_result_fifo: self-checking test of the result FIFO.
//
// Pushes and pops random 256-bit words at random, with a queue as the
// reference model: every popped word must be the oldest one pushed, and
// `full`, `empty` and `count` must agree with the queue length.  Phases with
// heavy pushing and heavy popping make the FIFO run full and empty.
//
// Own choice: the FIFO depth; the paper gives only the FIFO's place.
module tb_result_fifo;
  localparam int unsigned DEPTH = 64;
  logic          clk = 1'b0, rst_n = 1'b0;
  logic          push, pop, full, empty;
  logic [255:0]  wdata, rdata;
  logic [6:0]    count;
  logic [255:0]  q [$];
  int            checks = 0, failures = 0, n_full = 0, n_empty = 0;

  always #5 clk = ~clk;

  result_fifo #(.WIDTH(256), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .wdata, .pop, .rdata,
    .full, .empty, .count);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; wdata = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 6000; cyc++) begin
      int push_pct;
      push_pct = ((cyc / 500) % 2 == 0) ? 80 : 20;
      @(negedge clk);
      checks++;
      if (full !== (q.size() == DEPTH) || empty !== (q.size() == 0) || count !== 7'(q.size())) begin
        failures++;
        $display("cycle %0d: flags full=%b empty=%b count=%0d, model %0d", cyc, full, empty, count, q.size());
      end
      if (full) n_full++;
      if (empty) n_empty++;
      push = !full && (($urandom % 100) < push_pct);
      pop  = !empty && (($urandom % 100) < 50);
      for (int k = 0; k < 8; k++) wdata[32*k +: 32] = $urandom;
      if (pop) begin
        checks++;
        if (rdata !== q[0]) begin failures++; $display("cycle %0d: data mismatch", cyc); end
        void'(q.pop_front());
      end
      if (push) q.push_back(wdata);
    end
    @(negedge clk); push = 0; pop = 0;
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("FIFO never full or never empty"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
