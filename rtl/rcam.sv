// rcam: the enhanced, bit-sliced RAM-based CAM (CAM64K8 by default).
//
// The CAM holds N words of M bits in N/(32*C) CU blocks, C = W/M units per
// block.  It is loaded one W-bit bus beat (C words) per cycle: beat number
// `addr` of a batch goes to block addr/32 at word position addr%32, so
// 2,048 beats fill the 65,536-word default CAM.  The same beats sent again
// with wr_bit = 0 clear the words they name; this is how the old batch is
// removed before a new one can be stored (a value is recorded as a single 1
// bit at {value, position}, so it must be cleared by value).
//
// A search takes one key per cycle and returns the N-bit bitmap index of
// that key, bit r set when record r of the batch equals the key.  Record r
// is word r%C of beat r/C.  Block i supplies bits i*32*C .. (i+1)*32*C-1.
//
// Timing: load/clear one beat per cycle (we); search result one cycle
// after re, held while re is low.
//
// From the paper: block count, units per block, beat-to-block order, output
// order, one-cycle search and the clear-by-rewriting scheme.  The address is
// $clog2(N*M/W) bits wide (11 for the default), where the block diagram
// prints 12; this design uses only the bits the 2,048 beats need.
module rcam #(
  parameter int unsigned N = 65536,
  parameter int unsigned M = 8,
  parameter int unsigned W = 256,
  localparam int unsigned AW = $clog2(N * M / W)
) (
  input  logic          clk,
  input  logic          we,
  input  logic          wr_bit,
  input  logic [AW-1:0] addr,
  input  logic [W-1:0]  data,
  input  logic          re,
  input  logic [M-1:0]  key,
  output logic [N-1:0]  bi
);

  localparam int unsigned C      = W / M;
  localparam int unsigned CB_W   = 32 * C;
  localparam int unsigned NUM_CB = N / CB_W;

  for (genvar i = 0; i < NUM_CB; i++) begin : g_cb
    logic cb_we;
    if (NUM_CB > 1) begin : g_sel
      assign cb_we = we && (addr[AW-1:5] == (AW-5)'(i));
    end else begin : g_one
      assign cb_we = we;
    end
    cb #(.M(M), .W(W)) u_cb (
      .clk   (clk),
      .we    (cb_we),
      .wr_bit(wr_bit),
      .addr  (addr[4:0]),
      .data  (data),
      .re    (re),
      .key   (key),
      .bi    (bi[i*CB_W +: CB_W])
    );
  end

  initial begin
    assert (N % CB_W == 0 && NUM_CB >= 1)
      else $error("rcam: N must be a multiple of 32*W/M");
  end

endmodule
