// tb_perf_counters: self-checking test of the cycle counters.
//
// Drives a made-up run: a random sequence of phases and streaming flags for
// a few thousand cycles, counting in the testbench how many cycles each
// counter should see.  Every counter is compared on its own every 16
// cycles and at the end.  Also checks that the counters hold after busy
// falls and clear on the next start.
//
// Follows the paper: the four timing terms.  Own choice: which phase
// counts where.
module tb_perf_counters;
  import bic_pkg::*;
  logic        clk = 1'b0, rst_n = 1'b0;
  logic        start, busy, streaming, eq_taken;
  phase_e      phase;
  logic [31:0] cyc_total, cyc_im, cyc_cam, cyc_qla, cyc_out, bi_count;
  int          e_total, e_im, e_cam, e_qla, e_out, e_bi;
  int          checks = 0, failures = 0;

  always #5 clk = ~clk;

  perf_counters dut (.clk, .rst_n, .start, .busy, .phase, .streaming, .eq_taken,
    .cyc_total, .cyc_im, .cyc_cam, .cyc_qla, .cyc_out, .bi_count);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check1(input string what, input string name, input logic [31:0] got, input int exp);
    checks++;
    if (got != 32'(exp)) begin
      failures++;
      if (failures < 10) $display("%s: %s = %0d, expected %0d", what, name, got, exp);
    end
  endtask

  // every counter on its own, so that a miscount names the counter
  task automatic compare(input string what);
    check1(what, "cyc_total", cyc_total, e_total);
    check1(what, "cyc_im",    cyc_im,    e_im);
    check1(what, "cyc_cam",   cyc_cam,   e_cam);
    check1(what, "cyc_qla",   cyc_qla,   e_qla);
    check1(what, "cyc_out",   cyc_out,   e_out);
    check1(what, "bi_count",  bi_count,  e_bi);
  endtask

  task automatic run(input int cycles);
    @(negedge clk);
    start = 1; busy = 0;
    @(negedge clk);
    start = 0;
    e_total = 0; e_im = 0; e_cam = 0; e_qla = 0; e_out = 0; e_bi = 0;
    compare("after start");
    for (int c = 0; c < cycles; c++) begin
      busy = 1;
      phase = phase_e'($urandom % 6);
      streaming = ($urandom % 3) == 0;
      eq_taken = ($urandom % 7) == 0;
      e_total++;
      if (phase == PH_IM) e_im++;
      if (phase == PH_LOAD || phase == PH_CLEAR) e_cam++;
      if (streaming) e_out++; else if (phase == PH_EXEC) e_qla++;
      if (eq_taken) e_bi++;
      @(negedge clk);
      if (c % 16 == 15) compare("during run");
    end
    busy = 0; streaming = 0; eq_taken = 0; phase = PH_IDLE;
    repeat (10) @(negedge clk);
    compare("after run");
  endtask

  initial begin
    start = 0; busy = 0; streaming = 0; eq_taken = 0; phase = PH_IDLE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(3000);
    run(1234);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
