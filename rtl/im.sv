// im: instruction memory of operation/key words.
//
// Holds DEPTH 32-bit instructions (4,096 by default).  The DMA writes one
// W-bit bus beat per cycle, i.e. W/32 = 8 instructions at once, into row
// `waddr`; instruction k of a beat sits in bits 32*k +: 32, so instruction
// number waddr*8 + k.  The sequencer reads one instruction per cycle by its
// number `raddr`; the word appears on rdata one cycle after re and holds
// while re is low.
//
// From the paper: the depth, the 32-bit word, eight instructions per bus
// beat and one instruction per cycle.  The order of instructions inside a
// beat (lowest bits first) is this design's choice.
module im
  import bic_pkg::*;
#(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = 256,
  localparam int unsigned PER_BEAT = W / INSTR_W,
  localparam int unsigned ROWS     = DEPTH / PER_BEAT,
  localparam int unsigned RAW      = $clog2(DEPTH),
  localparam int unsigned WAW      = $clog2(ROWS)
) (
  input  logic           clk,
  input  logic           we,
  input  logic [WAW-1:0] waddr,
  input  logic [W-1:0]   wdata,
  input  logic           re,
  input  logic [RAW-1:0] raddr,
  output instr_t         rdata
);

  localparam int unsigned SEL_W = $clog2(PER_BEAT);

  logic [W-1:0] ram [ROWS];

  logic [WAW-1:0]   row;
  logic [SEL_W-1:0] sel;
  assign row = raddr[RAW-1:SEL_W];
  assign sel = raddr[SEL_W-1:0];

  always_ff @(posedge clk) begin
    if (we) ram[waddr] <= wdata;
    if (re) rdata <= instr_t'(ram[row][INSTR_W*sel +: INSTR_W]);
  end

endmodule
