// qla: the query logic array with its result register and result FIFO.
//
// For every record r there is one logic set: an OR gate (result[r] |
// bi[r]), an inverter (~result[r]) and a multiplexer that picks the new
// value of result[r] from the OR output, the inverter output or the old
// value.  All N sets are driven by the same two select lines taken from the
// operation field, so an OR or NO instruction updates the whole N-bit result
// register in one cycle.  The register starts at zero after reset.
//
// An EQ instruction sends the result out: the register is moved into the
// FIFO W bits per cycle, lowest records first, by shifting it right by W
// each cycle, so after N/W beats (256 for the default) it is empty again,
// which is the automatic clear after EQ.  While this runs `in_ready` is low
// and the next instruction waits; a full FIFO pauses the shift.
//
// Interface: in_valid/in_ready handshake carrying the operation field
// (in_op) and the R-CAM bitmap of the instruction's key (in_bi); FIFO read
// side (out_valid, out_data, out_pop) towards the DMA; status outputs.
//
// From the paper: the logic sets, the result register, OR/NO in one cycle,
// EQ taking N/W cycles, the clear after EQ and the FIFO.  The shift-out of
// the register, the handshake and the precedence of operation bits when
// more than one is set (EQ, then OR, then NO) are this design's choices.
//
// Lint note: clearing the 65,536-bit result register is a constant fill
// wider than the linter's replication limit; it is a plain reset of a wide
// register, not a mistake.  The FIFO's assertions use rst_n synchronously
// (disable iff) while the registers use it as an asynchronous reset; the
// assertions are not hardware, so the mixed use is intended.
module qla
  import bic_pkg::*;
#(
  parameter int unsigned N          = 65536,
  parameter int unsigned W          = 256,
  parameter int unsigned FIFO_DEPTH = 64,
  localparam int unsigned BEATS     = N / W,
  localparam int unsigned BW        = $clog2(BEATS + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // instruction stream
  input  logic                         in_valid,
  output logic                         in_ready,
  input  op_t                          in_op,
  input  logic [N-1:0]                 in_bi,
  // FIFO read side
  output logic                         out_valid,
  output logic [W-1:0]                 out_data,
  input  logic                         out_pop,
  // status
  output logic                         streaming,   // an EQ output is in progress
  output logic                         fifo_full,
  output logic [$clog2(FIFO_DEPTH):0]  fifo_count
);

  logic [N-1:0]  result;
  logic [BW-1:0] beat;
  logic          push;
  logic          fifo_empty;
  act_e          act;

  assign act      = decode_op(in_op);
  assign in_ready = !streaming;
  assign push     = streaming && !fifo_full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      result    <= '0;
      streaming <= 1'b0;
      beat      <= '0;
    end else if (streaming) begin
      if (push) begin
        result <= result >> W;
        if (beat == BW'(BEATS - 1)) begin
          streaming <= 1'b0;
          beat      <= '0;
        end else begin
          beat <= beat + 1'b1;
        end
      end
    end else if (in_valid) begin
      unique case (act)
        ACT_OR:  result <= result | in_bi;   // OR gates
        ACT_NOT: result <= ~result;          // inverters
        ACT_EQ:  streaming <= 1'b1;          // output and clear
        default: ;                           // hold
      endcase
    end
  end

  result_fifo #(.WIDTH(W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk  (clk),
    .rst_n(rst_n),
    .push (push),
    .wdata(result[W-1:0]),
    .pop  (out_pop),
    .rdata(out_data),
    .full (fifo_full),
    .empty(fifo_empty),
    .count(fifo_count)
  );

  assign out_valid = !fifo_empty;

  initial begin
    assert (N % W == 0) else $error("qla: N must be a multiple of W");
  end

endmodule
