// tb_qla: self-checking test of the query logic array.
//
// Uses N = 1,024 records on a 256-bit bus (4 result beats) and a 2-entry
// FIFO so that the FIFO fills up.  A random program of OR, NO, EQ and
// no-op instructions with random bitmaps is fed through the valid/ready
// handshake while the FIFO is emptied (always in phase 1, at random in
// phase 2).  A reference result register is kept alongside: OR and NO
// update it, EQ appends its four 256-bit beats (lowest records first) to
// the expected output and clears it.  Every popped beat is compared.  It
// also checks that an EQ holds off the next instruction for exactly N/W
// cycles when the FIFO never fills, and that the FIFO did fill and stall
// the output in phase 2.
//
// Follows the paper: OR/NO/EQ semantics, N/W output cycles, auto clear.
// Own choice: reduced N and FIFO depth to force the full-FIFO case.
module tb_qla;
  import bic_pkg::*;
  localparam int unsigned N = 1024, W = 256, BEATS = N / W;
  logic          clk = 1'b0, rst_n = 1'b0;
  logic          in_valid, in_ready, out_valid, out_pop, streaming, fifo_full;
  op_t           in_op;
  logic [N-1:0]  in_bi, model;
  logic [W-1:0]  out_data;
  logic [1:0]    fifo_count;
  logic [W-1:0]  exp_q [$];
  int            checks = 0, failures = 0;
  int            n_or = 0, n_no = 0, n_eq = 0, n_full_stall = 0;
  int            pop_pct = 100;

  always #5 clk = ~clk;

  qla #(.N(N), .W(W), .FIFO_DEPTH(2)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_op, .in_bi,
    .out_valid, .out_data, .out_pop, .streaming, .fifo_full, .fifo_count);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output side: pop at random, compare with the reference
  always @(negedge clk) begin
    out_pop <= out_valid && (($urandom % 100) < pop_pct);
  end
  always @(posedge clk) begin
    if (rst_n && streaming && fifo_full) n_full_stall++;
    if (rst_n && out_pop && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output beat");
      end else begin
        if (out_data !== exp_q[0]) begin failures++; $display("output beat mismatch"); end
        void'(exp_q.pop_front());
      end
    end
  end

  task automatic issue(input op_t op, input logic [N-1:0] bi);
    @(negedge clk);
    in_valid = 1'b1; in_op = op; in_bi = bi;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    unique case (decode_op(op))
      ACT_OR:  begin model = model | bi; n_or++; end
      ACT_NOT: begin model = ~model;     n_no++; end
      ACT_EQ:  begin
        for (int b = 0; b < BEATS; b++) exp_q.push_back(model[b*W +: W]);
        model = '0; n_eq++;
      end
      default: ;
    endcase
    #1 in_valid = 1'b0;
  endtask

  function automatic logic [N-1:0] rand_bi();
    logic [N-1:0] v;
    for (int i = 0; i < N / 32; i++) v[32*i +: 32] = $urandom & $urandom;  // sparse
    return v;
  endfunction

  initial begin
    in_valid = 0; in_op = '0; in_bi = '0; out_pop = 0; model = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // the example program of the paper: result != {10,17,29} style
    issue('{eq:0, no:0, orr:1}, rand_bi());
    issue('{eq:0, no:0, orr:1}, rand_bi());
    issue('{eq:0, no:0, orr:1}, rand_bi());
    issue('{eq:0, no:1, orr:0}, rand_bi());
    // EQ timing with an always-emptied FIFO: in_ready low for BEATS cycles
    begin
      int busy;
      busy = 0;
      issue('{eq:1, no:0, orr:0}, '0);
      @(negedge clk);
      while (!in_ready) begin busy++; @(negedge clk); end
      checks++;
      if (busy != BEATS) begin failures++; $display("EQ took %0d cycles, expected %0d", busy, BEATS); end
    end
    // result must be clear now: NO then EQ gives all ones
    issue('{eq:0, no:1, orr:0}, rand_bi());
    issue('{eq:1, no:0, orr:0}, rand_bi());
    // random programs, FIFO drained slowly
    pop_pct = 30;
    for (int i = 0; i < 400; i++) begin
      int r;
      op_t op;
      r = $urandom % 10;
      op = (r < 5) ? '{eq:0, no:0, orr:1} : (r < 7) ? '{eq:0, no:1, orr:0} :
           (r < 9) ? '{eq:1, no:0, orr:0} : '{eq:0, no:0, orr:0};
      issue(op, rand_bi());
    end
    issue('{eq:1, no:0, orr:0}, '0);
    pop_pct = 100;
    while (exp_q.size() != 0) @(negedge clk);
    repeat (5) @(negedge clk);
    checks++;
    if (n_full_stall == 0 || n_or == 0 || n_no == 0 || n_eq == 0) begin
      failures++; $display("mechanism not exercised: or=%0d no=%0d eq=%0d stall=%0d", n_or, n_no, n_eq, n_full_stall);
    end
    $display("OR=%0d NO=%0d EQ=%0d FIFO-full stall cycles=%0d", n_or, n_no, n_eq, n_full_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
