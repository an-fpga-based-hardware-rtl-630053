// dma: three-channel direct memory access engine of the accelerator.
//
// Channel 1 copies instruction beats from external memory into the
// instruction memory; channel 2 copies batch data beats into the R-CAM,
// either to load them (wr_bit = 1) or to clear them again (wr_bit = 0);
// channel 3 empties the result FIFO into external memory.  Channels 1 and 2
// share the memory read port and are used one at a time, on request of the
// sequencer (rd_start with destination, clear flag, base address and beat
// count; rd_done pulses once the last beat has arrived).  Channel 3 runs on
// its own port whenever the FIFO holds data, writing consecutive beat
// addresses from wr_base, which the sequencer sets with wr_init at the start
// of a run.
//
// Memory port (to the DDR3 controller): read requests use a valid/ready
// handshake with one beat per request; read data returns in request order
// with rd_rvalid, one beat per cycle at most, and is always accepted.  Up
// to MAX_OUT reads may be outstanding.  Writes use a valid/ready handshake
// carrying address and data.  Addresses count W-bit beats.
//
// Timing: with a memory that answers every cycle, a job of B beats streams
// one beat per cycle into the IM or R-CAM, so the R-CAM is filled at the bus
// rate (32 bytes per cycle by default).  Each beat received is written the
// same cycle it arrives.
//
// From the paper: three channels, 256-bit bus, full-bandwidth transfers
// between DDR3 and the IM, R-CAM and FIFO.  The port protocol, the limit on
// outstanding reads and the beat addressing are this design's choices.
module dma #(
  parameter int unsigned W       = 256,
  parameter int unsigned ADDR_W  = 25,
  parameter int unsigned CNT_W   = 16,
  parameter int unsigned IM_WAW  = 9,
  parameter int unsigned CAM_AW  = 11,
  parameter int unsigned MAX_OUT = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // read job from the sequencer
  input  logic              rd_start,
  input  logic              rd_to_cam,   // 0: instruction memory, 1: R-CAM
  input  logic              rd_clr,      // R-CAM job clears instead of loads
  input  logic [ADDR_W-1:0] rd_base,
  input  logic [CNT_W-1:0]  rd_beats,
  output logic              rd_busy,
  output logic              rd_done,
  // write channel set-up
  input  logic              wr_init,
  input  logic [ADDR_W-1:0] wr_base,
  output logic [31:0]       wr_count,
  // memory read port
  output logic              mem_rd_valid,
  input  logic              mem_rd_ready,
  output logic [ADDR_W-1:0] mem_rd_addr,
  input  logic              mem_rd_rvalid,
  input  logic [W-1:0]      mem_rd_rdata,
  // memory write port
  output logic              mem_wr_valid,
  input  logic              mem_wr_ready,
  output logic [ADDR_W-1:0] mem_wr_addr,
  output logic [W-1:0]      mem_wr_data,
  // instruction memory write
  output logic              im_we,
  output logic [IM_WAW-1:0] im_waddr,
  output logic [W-1:0]      im_wdata,
  // R-CAM write
  output logic              cam_we,
  output logic              cam_wr_bit,
  output logic [CAM_AW-1:0] cam_addr,
  output logic [W-1:0]      cam_data,
  // result FIFO read side
  input  logic              fifo_valid,
  input  logic [W-1:0]      fifo_data,
  output logic              fifo_pop
);

  localparam int unsigned OW = $clog2(MAX_OUT + 1);

  // ---------------- channels 1 and 2: reads ----------------
  logic              to_cam, clr;
  logic [ADDR_W-1:0] base;
  logic [CNT_W-1:0]  beats, issued, received;
  logic [OW-1:0]     outstanding;
  logic              req_fire, rsp_fire;

  assign mem_rd_valid = rd_busy && (issued != beats) && (outstanding != OW'(MAX_OUT));
  assign mem_rd_addr  = base + ADDR_W'(issued);
  assign req_fire     = mem_rd_valid && mem_rd_ready;
  assign rsp_fire     = rd_busy && mem_rd_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy     <= 1'b0;
      rd_done     <= 1'b0;
      to_cam      <= 1'b0;
      clr         <= 1'b0;
      base        <= '0;
      beats       <= '0;
      issued      <= '0;
      received    <= '0;
      outstanding <= '0;
    end else begin
      rd_done <= 1'b0;
      if (rd_start && !rd_busy) begin
        to_cam      <= rd_to_cam;
        clr         <= rd_clr;
        base        <= rd_base;
        beats       <= rd_beats;
        issued      <= '0;
        received    <= '0;
        outstanding <= '0;
        if (rd_beats == '0) rd_done <= 1'b1;
        else                rd_busy <= 1'b1;
      end else if (rd_busy) begin
        if (req_fire) issued <= issued + 1'b1;
        if (rsp_fire) received <= received + 1'b1;
        outstanding <= outstanding + OW'(req_fire) - OW'(rsp_fire);
        if (rsp_fire && received == beats - 1'b1) begin
          rd_busy <= 1'b0;
          rd_done <= 1'b1;
        end
      end
    end
  end

  assign im_we      = rsp_fire && !to_cam;
  assign im_waddr   = IM_WAW'(received);
  assign im_wdata   = mem_rd_rdata;
  assign cam_we     = rsp_fire && to_cam;
  assign cam_wr_bit = !clr;
  assign cam_addr   = CAM_AW'(received);
  assign cam_data   = mem_rd_rdata;

  // ---------------- channel 3: result writes ----------------
  logic [ADDR_W-1:0] wr_ptr;

  assign mem_wr_valid = fifo_valid;
  assign mem_wr_addr  = wr_ptr;
  assign mem_wr_data  = fifo_data;
  assign fifo_pop     = mem_wr_valid && mem_wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr   <= '0;
      wr_count <= '0;
    end else if (wr_init) begin
      wr_ptr   <= wr_base;
      wr_count <= '0;
    end else if (fifo_pop) begin
      wr_ptr   <= wr_ptr + 1'b1;
      wr_count <= wr_count + 1'b1;
    end
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   mem_rd_rvalid |-> (rd_busy && outstanding != '0));

endmodule
