// mem_model: behavioural model of the external DDR3 memory and its
// controller, for simulation only.
//
// Presents the accelerator's memory ports: reads are accepted with a
// valid/ready handshake and answered in order after LAT cycles, one beat
// per request; writes are accepted with valid/ready.  The ready signals are
// dropped at random with the given percentages to imitate a busy memory
// controller.  The array `mem` is DEPTH beats and is read and written by the
// testbench directly to place inputs and collect results; addresses wrap
// modulo DEPTH.
//
// Own choice throughout: the paper does not describe the controller's
// interface; this model only follows the 256-bit beat and in-order delivery
// that the design assumes.
module mem_model #(
  parameter int unsigned W      = 256,
  parameter int unsigned ADDR_W = 25,
  parameter int unsigned DEPTH  = 8192,
  parameter int unsigned LAT    = 4
) (
  input  logic              clk,
  input  int unsigned       rd_stall_pct,
  input  int unsigned       wr_stall_pct,
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic              rd_rvalid,
  output logic [W-1:0]      rd_rdata,
  input  logic              wr_valid,
  output logic              wr_ready,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [W-1:0]      wr_data
);

  localparam int unsigned IW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic         pv [LAT];
  logic [W-1:0] pd [LAT];
  int unsigned  reads, writes;

  initial begin
    rd_ready = 1'b0;
    wr_ready = 1'b0;
    reads    = 0;
    writes   = 0;
    for (int i = 0; i < LAT; i++) begin
      pv[i] = 1'b0;
      pd[i] = '0;
    end
  end

  always @(posedge clk) begin   // plain always: the testbench also writes mem and the initial block sets the rest
    rd_ready <= ($urandom % 100) >= rd_stall_pct;
    wr_ready <= ($urandom % 100) >= wr_stall_pct;
    pv[0] <= rd_valid && rd_ready;
    pd[0] <= mem[rd_addr[IW-1:0]];
    for (int i = 1; i < LAT; i++) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    if (rd_valid && rd_ready) reads <= reads + 1;
    if (wr_valid && wr_ready) begin
      mem[wr_addr[IW-1:0]] <= wr_data;
      writes <= writes + 1;
    end
  end

  assign rd_rvalid = pv[LAT-1];
  assign rd_rdata  = pd[LAT-1];

endmodule
