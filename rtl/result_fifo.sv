// result_fifo: synchronous first-word-fall-through FIFO for result beats.
//
// Sits between the result register of the query logic array and the DMA
// write channel so that a bitmap index can be moved out of the result
// register at one beat per cycle while the external memory accepts writes
// at its own pace.  `rdata` always shows the oldest entry when `empty` is
// low; a pop removes it.  Push and pop may happen in the same cycle.
// `full` stops the writer.
//
// From the paper: a FIFO at this place and its purpose.  Its depth is not
// given; 64 beats of 256 bits (16 Kbit) is this design's choice, sized to
// the memory the paper's resource table leaves over after the R-CAM and the
// instruction memory.  Reset empties it.
//
// Lint note: rst_n is the asynchronous reset of the pointers and also
// disables the two assertions (disable iff); the assertions are not hardware.
module result_fifo #(
  parameter int unsigned WIDTH = 256,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned PW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             push,
  input  logic [WIDTH-1:0] wdata,
  input  logic             pop,
  output logic [WIDTH-1:0] rdata,
  output logic             full,
  output logic             empty,
  output logic [PW:0]      count
);

  logic [WIDTH-1:0] ram [DEPTH];
  logic [PW-1:0]    wptr, rptr;

  assign full  = (count == (PW+1)'(DEPTH));
  assign empty = (count == '0);
  assign rdata = ram[rptr];

  always_ff @(posedge clk) begin
    if (push && !full) ram[wptr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (push && !full)  wptr <= (wptr == PW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop && !empty)  rptr <= (rptr == PW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (PW+1)'(push && !full) - (PW+1)'(pop && !empty);
    end
  end

  // Handshake rules: never write a full FIFO, never read an empty one.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop  |-> !empty);

endmodule
