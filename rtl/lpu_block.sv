// lpu_block: one LPV stage of the LPU with the switch network after it.
//
// An LPV (one compute cycle) and the switch network behind it (T_SW = 5
// cycles) form a block that spends T_C = 6 cycles on one logic level; this
// grouping, and the programming of every stage of the block from its own
// instruction queue, follow the paper. This design keeps two queues per
// block: the LPE queue (M LPE instructions per word) and the switch queue
// (2M source indices per word). The other switch stages are plain pipeline
// registers here and need no instructions (see switch_network).
//
// Timing: the operands of a wave enter on in_opnd with in_valid; the same
// wave's address must be on lpe_raddr one cycle earlier and on sw_raddr in
// the same cycle (both come from the read address shift register). The
// routed operands for the next block leave T_C cycles later.
// Instruction words: LPE j uses bits [j*LPE_IW +: LPE_IW] of the LPE word;
// switch output d uses bits [d*SW +: SW] of the switch word.
module lpu_block
  import lpu_pkg::*;
#(
  parameter int unsigned M        = M_LPE_DEF,
  parameter int unsigned W        = 2 * M,
  parameter int unsigned IQ_DEPTH = IQ_DEPTH_DEF,
  localparam int unsigned AW      = (IQ_DEPTH > 1) ? $clog2(IQ_DEPTH) : 1,
  localparam int unsigned SW      = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LPE_WW  = M * LPE_IW,
  localparam int unsigned SW_WW   = 2 * M * SW
) (
  input  logic              clk,
  input  logic              rst_n,
  // host writes into this block's instruction queues
  input  logic              lpe_we,
  input  logic              sw_we,
  input  logic [AW-1:0]     iq_waddr,
  input  logic [LPE_WW-1:0] lpe_wdata,
  input  logic [SW_WW-1:0]  sw_wdata,
  // read addresses from the read address shift register
  input  logic [AW-1:0]     lpe_raddr,
  input  logic [AW-1:0]     sw_raddr,
  // data path
  input  logic              in_valid,
  input  logic [W-1:0]      in_opnd  [2*M],
  output logic              out_valid,
  output logic [W-1:0]      out_opnd [2*M]
);

  logic [LPE_WW-1:0] lpe_word;
  logic [SW_WW-1:0]  sw_word;
  lpe_instr_t        instr [M];
  logic [SW-1:0]     sel   [2*M];
  logic              res_valid;
  logic [W-1:0]      res   [M];

  instr_queue #(.DEPTH(IQ_DEPTH), .WIDTH(LPE_WW)) u_lpe_iq (
    .clk(clk), .we(lpe_we), .waddr(iq_waddr), .wdata(lpe_wdata),
    .raddr(lpe_raddr), .rdata(lpe_word)
  );

  instr_queue #(.DEPTH(IQ_DEPTH), .WIDTH(SW_WW)) u_sw_iq (
    .clk(clk), .we(sw_we), .waddr(iq_waddr), .wdata(sw_wdata),
    .raddr(sw_raddr), .rdata(sw_word)
  );

  always_comb begin
    for (int j = 0; j < M; j++)   instr[j] = lpe_instr_t'(lpe_word[j*LPE_IW +: LPE_IW]);
    for (int d = 0; d < 2*M; d++) sel[d]   = sw_word[d*SW +: SW];
  end

  lpv #(.M(M), .W(W)) u_lpv (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .opnd(in_opnd), .instr(instr),
    .out_valid(res_valid), .res(res)
  );

  switch_network #(.M(M), .W(W), .STAGES(T_SW)) u_sw (
    .clk(clk), .rst_n(rst_n),
    .in_valid(res_valid), .in_data(res), .sel(sel),
    .out_valid(out_valid), .out_data(out_opnd)
  );

endmodule
