// lpe: logic processing element.
//
// One LPE evaluates one gate of the netlist per cycle on W-bit packed
// operands (W = 2m Boolean samples side by side). Each of its two inputs has
// a snapshot register that can hold an operand for as long as the program
// wants, so a gate can combine a value arriving now with a value that passed
// by earlier (the paper's way of keeping results of one subgraph until the
// subgraph that consumes them is computed, without a scratchpad memory).
//
// Per cycle, when in_valid is high, the instruction (lpu_pkg::lpe_instr_t)
// selects for each operand the live input or the snapshot register's value
// held before this cycle, optionally stores the live input into the snapshot
// register, and applies op. The result is registered: y is valid one cycle
// after the inputs (the one compute cycle of the paper's t_c). An idle cycle
// (in_valid low) changes neither snapshot register and drives y to zero.
// OP_INV also drives zero; the paper only says such an instruction
// "invalidates output", the zero value is this design's choice.
module lpe
  import lpu_pkg::*;
#(
  parameter int unsigned W = 2 * M_LPE_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  lpe_instr_t   instr,
  output logic [W-1:0] y
);

  logic [W-1:0] snap_a_q, snap_b_q;
  logic [W-1:0] opa, opb, f;

  assign opa = instr.use_snap_a ? snap_a_q : a;
  assign opb = instr.use_snap_b ? snap_b_q : b;

  always_comb begin
    unique case (instr.op)
      OP_BUF:  f = opa;
      OP_NOT:  f = ~opa;
      OP_AND:  f = opa & opb;
      OP_OR:   f = opa | opb;
      OP_XOR:  f = opa ^ opb;
      OP_XNOR: f = ~(opa ^ opb);
      default: f = '0;  // OP_INV and unused codes
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      snap_a_q <= '0;
      snap_b_q <= '0;
      y        <= '0;
    end else begin
      y <= in_valid ? f : '0;
      if (in_valid && instr.snap_a) snap_a_q <= a;
      if (in_valid && instr.snap_b) snap_b_q <= b;
    end
  end

endmodule
