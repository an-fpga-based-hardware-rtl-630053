// bic_pkg: constants and types shared by the bitmap index creator (BIC).
//
// The instruction word follows the layout printed for the instruction
// memory: key value in bits 31..16, reserved bits 15..3, and a one-hot
// operation field in bits 2..0 (bit 0 OR, bit 1 NO, bit 2 EQ).
//   OR : result <= result | BI(key)
//   NO : result <= ~result
//   EQ : send the result out and clear it
// The sizes below are those of the BIC64K8 configuration: a 65,536-word,
// 8-bit R-CAM on a 256-bit memory bus with a 4,096-entry instruction memory.
// The result FIFO depth and the external address width are this design's
// own choices (see the README).
package bic_pkg;

  localparam int unsigned BUS_W      = 256;    // external data bus width w
  localparam int unsigned INSTR_W    = 32;     // instruction word width
  localparam int unsigned KEY_W      = 16;     // key field width
  localparam int unsigned DEF_N      = 65536;  // R-CAM words (BIC64K8)
  localparam int unsigned DEF_M      = 8;      // R-CAM word width (BIC64K8)
  localparam int unsigned DEF_IM     = 4096;   // instruction memory depth
  localparam int unsigned DEF_FIFO   = 64;     // result FIFO depth in bus beats
  localparam int unsigned DEF_ADDR_W = 25;     // beat address: 1 GB / 32 B

  // Operation field, bit positions as in the instruction word.
  typedef struct packed {
    logic eq;   // bit 2
    logic no;   // bit 1
    logic orr;  // bit 0
  } op_t;

  typedef struct packed {
    logic [KEY_W-1:0] key;   // bits 31..16
    logic [12:0]      rsvd;  // bits 15..3
    op_t              op;    // bits 2..0
  } instr_t;

  // Action the query logic array takes for an operation field.  A field
  // with several bits set is resolved EQ first, then OR, then NO.
  typedef enum logic [1:0] {
    ACT_HOLD = 2'd0,
    ACT_OR   = 2'd1,
    ACT_NOT  = 2'd2,
    ACT_EQ   = 2'd3
  } act_e;

  function automatic act_e decode_op(op_t op);
    if (op.eq)       return ACT_EQ;
    else if (op.orr) return ACT_OR;
    else if (op.no)  return ACT_NOT;
    else             return ACT_HOLD;
  endfunction

  // What the sequencer is doing; also read by the cycle counters.
  typedef enum logic [2:0] {
    PH_IDLE  = 3'd0,  // waiting for start
    PH_IM    = 3'd1,  // copying instructions into the IM
    PH_LOAD  = 3'd2,  // loading a batch into the R-CAM
    PH_EXEC  = 3'd3,  // running the instructions on the batch
    PH_CLEAR = 3'd4,  // clearing the batch from the R-CAM
    PH_DRAIN = 3'd5   // waiting for the last results to be written
  } phase_e;

endpackage
