// lpu_pkg: types and constants shared by the logic processing unit (LPU).
//
// The LPU executes a levelized, fully path balanced Boolean netlist. Every
// logic processing element (LPE) performs one elementary gate per cycle on
// W-bit packed operands (W = 2m, so one instruction evaluates the same gate
// for 2m independent Boolean samples). The operation set (AND, OR, XOR,
// XNOR as two-input operations; NOT and BUFFER as one-input operations)
// follows the paper. The "invalidate" operation, which drives a zero
// result, is shown in the paper's instruction queue figure; its encoding and
// the bit layout of every instruction word below are this design's choice.
package lpu_pkg;

  // Default sizes. N_LPV and T_SW come from the paper; the rest are chosen.
  localparam int unsigned N_LPV_DEF    = 16;   // LPVs per LPU
  localparam int unsigned M_LPE_DEF    = 32;   // LPEs per LPV (m)
  localparam int unsigned T_SW         = 5;    // switch network stages
  localparam int unsigned T_C          = T_SW + 1; // cycles per logic level
  localparam int unsigned IQ_DEPTH_DEF = 1024; // instruction queue entries
  localparam int unsigned IB_DEPTH_DEF = 512;  // input data buffer entries
  localparam int unsigned OB_DEPTH_DEF = 256;  // output data buffer entries

  // Fixed width of buffer addresses carried inside instruction words; a
  // buffer uses the low $clog2(depth) bits.
  localparam int unsigned BUF_AW = 16;

  // LPE operation.
  typedef enum logic [2:0] {
    OP_INV  = 3'd0,  // invalidate: result forced to zero
    OP_BUF  = 3'd1,  // y = a
    OP_NOT  = 3'd2,  // y = ~a
    OP_AND  = 3'd3,
    OP_OR   = 3'd4,
    OP_XOR  = 3'd5,
    OP_XNOR = 3'd6
  } lpe_op_e;

  // One LPE instruction: the operation plus control of the two snapshot
  // registers. snap_x stores the live operand x in its snapshot register;
  // use_snap_x feeds the logic unit from the snapshot register instead of
  // the live input (the value stored before this cycle).
  typedef struct packed {
    lpe_op_e op;
    logic    snap_a;
    logic    snap_b;
    logic    use_snap_a;
    logic    use_snap_b;
  } lpe_instr_t;

  localparam int unsigned LPE_IW = $bits(lpe_instr_t);

  // Source of the operands fed to LPV 0 for one address (one wave).
  typedef enum logic [1:0] {
    SRC_NONE = 2'd0,  // zeros
    SRC_IBUF = 2'd1,  // next entry of the input data buffer (counter)
    SRC_OBUF = 2'd2   // recirculate an output data buffer entry
  } in_src_e;

  typedef struct packed {
    in_src_e           src;
    logic [BUF_AW-1:0] obuf_addr;
  } in_ctl_t;

  // What the output data buffer does with a wave leaving the last LPV.
  typedef struct packed {
    logic              store;
    logic [BUF_AW-1:0] obuf_addr;
  } out_ctl_t;

  // Host selection of the instruction queue to write.
  typedef enum logic [1:0] {
    IQ_LPE = 2'd0,  // LPE instructions of one LPV
    IQ_SW  = 2'd1,  // switch network routing of one LPV
    IQ_IN  = 2'd2,  // input stage control (one queue)
    IQ_OUT = 2'd3   // output stage control (one queue)
  } iq_kind_e;

endpackage
