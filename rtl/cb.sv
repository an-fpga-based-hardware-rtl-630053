// cb: a CU block (CB), the bit-sliced slice of the enhanced R-CAM.
//
// A CB holds C = W/M CAM units side by side.  One bus beat carries C words
// and every unit takes one of them at once: word k of the beat (bits
// k*M +: M) goes to unit k, all at the same word position `addr`.  Over 32
// beats the CB fills 32*C consecutive words (1,024 for W=256, M=8).
//
// The outputs are interleaved so that the bitmap index keeps record order:
// bit j*C + k of the CB's slice is bit j of unit k, i.e. the record that
// arrived as word k of beat j.  For the default CB this gives slice bits
// 0..31 = bit 0 of CU00..CU31, bits 32..63 = bit 1 of CU00..CU31, and so on.
//
// Timing: one beat written per cycle; a search returns the 32*C-bit slice
// one cycle after re.
//
// From the paper: the CB structure, the number of CUs per CB (bus width over
// word width), the parallel load and the output ordering.
module cb #(
  parameter int unsigned M = 8,
  parameter int unsigned W = 256
) (
  input  logic               clk,
  input  logic               we,
  input  logic               wr_bit,
  input  logic [4:0]         addr,
  input  logic [W-1:0]       data,
  input  logic               re,
  input  logic [M-1:0]       key,
  output logic [32*(W/M)-1:0] bi
);

  localparam int unsigned C = W / M;

  logic [31:0] cu_idx [C];

  for (genvar k = 0; k < C; k++) begin : g_cu
    cu #(.M(M)) u_cu (
      .clk   (clk),
      .we    (we),
      .wr_bit(wr_bit),
      .addr  (addr),
      .data  (data[k*M +: M]),
      .re    (re),
      .key   (key),
      .index (cu_idx[k])
    );
  end

  always_comb begin
    for (int j = 0; j < 32; j++)
      for (int k = 0; k < C; k++)
        bi[j*C + k] = cu_idx[k][j];
  end

endmodule
