// cu: a 32-word x M-bit CAM unit built from M/8 8-bit units (cu8).
//
// Each 8-bit unit stores one byte lane of every word and is searched with
// the matching byte of the key.  A word matches only if every byte lane
// matches, so the lane index vectors are ANDed bit by bit (32 AND gates of
// M/8 inputs).  With M = 8 this is a single cu8; the BIC32K16 configuration
// uses M = 16, two units and 32 two-input AND gates per CU.
//
// Interface and timing are those of cu8: writes take one cycle, a search
// returns its 32-bit index one cycle after re.
//
// From the paper: the horizontal composition of units and the AND of their
// outputs.  Byte lane s of the word and key goes to unit s (lane 0 = bits
// 7..0); that lane order is this design's choice.
module cu #(
  parameter int unsigned M = 8
) (
  input  logic         clk,
  input  logic         we,
  input  logic         wr_bit,
  input  logic [4:0]   addr,
  input  logic [M-1:0] data,
  input  logic         re,
  input  logic [M-1:0] key,
  output logic [31:0]  index
);

  localparam int unsigned LANES = M / 8;

  logic [31:0] lane_idx [LANES];

  for (genvar s = 0; s < LANES; s++) begin : g_lane
    cu8 u_cu8 (
      .clk   (clk),
      .we    (we),
      .wr_bit(wr_bit),
      .addr  (addr),
      .data  (data[8*s +: 8]),
      .re    (re),
      .key   (key[8*s +: 8]),
      .index (lane_idx[s])
    );
  end

  always_comb begin
    index = '1;
    for (int s = 0; s < LANES; s++) index &= lane_idx[s];
  end

  initial begin
    assert (M % 8 == 0 && M >= 8) else $error("cu: M must be a multiple of 8");
  end

endmodule
