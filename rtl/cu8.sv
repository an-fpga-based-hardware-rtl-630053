// cu8: one R-CAM unit (CU), a 32-word x 8-bit RAM-based CAM.
//
// The CU is a single dual-port RAM seen at two widths.  Port A is
// 8,192 x 1 bit and is addressed by {data, addr}: writing a 1 there records
// that word `addr` (0..31) holds the value `data`; writing a 0 removes it.
// Port B is 256 x 32 bits and is addressed by the search key: the 32-bit
// word read back has bit j set when word j holds the key, i.e. it is the
// key's bitmap over the 32 words.  One CAM bit therefore costs 32 RAM bits.
//
// Interface: write port (we, wr_bit, addr, data) and search port (re, key,
// index).  Timing: one write per cycle; a search issued with re=1 shows its
// 32-bit index on the next clock edge (registered RAM output), and the
// output holds while re=0.  Writing and searching the same cycle is not
// used by the accelerator.
//
// From the paper: the port geometry (8,192x1 / 256x32), the port names
// data/addr/write_en/key/index and their widths.  This design's own: the
// wr_bit input carrying the value written (1 to load, 0 to clear, as the
// load algorithm's RESET ? 0 : DATA), the read enable, and the RAM starting
// all-zero (an empty CAM), as FPGA block RAM does after configuration.
module cu8 (
  input  logic        clk,
  // port A: load / clear
  input  logic        we,       // write_en
  input  logic        wr_bit,   // 1 = store word, 0 = clear word
  input  logic [4:0]  addr,     // word position 0..31
  input  logic [7:0]  data,     // word value
  // port B: search
  input  logic        re,
  input  logic [7:0]  key,
  output logic [31:0] index
);

  logic [31:0] ram [256];

  initial begin
    for (int i = 0; i < 256; i++) ram[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we) ram[data][addr] <= wr_bit;
    if (re) index <= ram[key];
  end

endmodule
