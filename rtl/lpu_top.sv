// lpu_top: the logic processing unit (LPU), a programmable engine for the
// levelized Boolean netlists that logic-based neural networks compile to.
//
// Structure: N LPU blocks in a line (LPV 0 .. LPV N-1, each followed by its
// switch network), an input data buffer in front, an output data buffer at
// the end and a recirculation path from the output data buffer back to LPV 0.
// A program is a list of addresses 0 .. len-1. The read address incrementor
// issues one address per cycle; each address launches one wave of operands
// into LPV 0 and travels with that wave down the read address shift
// register, so every pipeline stage executes the instruction stored at the
// wave's address in its own queue. A subgraph (MFG) of the netlist whose
// levels are L_bottom .. L_top is programmed at one address in the queues of
// LPVs L_bottom .. L_top; results it leaves behind for a later subgraph are
// kept in the LPE snapshot registers of the consuming LPV.
//
// Per address, two more queues control the ends of the pipeline: the input
// control queue chooses what LPV 0 receives (nothing, the next input buffer
// entry, or an output buffer entry fed back, which is how levels beyond LPV
// N-1 are processed), and the output control queue decides whether the wave
// leaving LPV N-1 is stored in the output data buffer and where.
//
// Host interface: write instruction queues (iq_*), write the input buffer
// (ib_*), pulse start with len, wait for done, read results (ob_*, one-cycle
// read latency). start also rewinds the input buffer counter. The pipeline
// structure, the 6-cycle logic level (1 LPE + 5 switch cycles), snapshot
// registers, the address shift register and the recirculation path follow
// the paper. Host ports, instruction encodings and buffer depths are this
// design's choices. Timing: done pulses len + 6*N + 4 cycles after the start
// cycle; a wave read back from the output buffer must be issued at least
// 6*N + 2 addresses after the wave that stored it.
module lpu_top
  import lpu_pkg::*;
#(
  parameter int unsigned N        = N_LPV_DEF,
  parameter int unsigned M        = M_LPE_DEF,
  parameter int unsigned W        = 2 * M,
  parameter int unsigned IQ_DEPTH = IQ_DEPTH_DEF,
  parameter int unsigned IB_DEPTH = IB_DEPTH_DEF,
  parameter int unsigned OB_DEPTH = OB_DEPTH_DEF,
  localparam int unsigned AW      = (IQ_DEPTH > 1) ? $clog2(IQ_DEPTH) : 1,
  localparam int unsigned NW      = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW      = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned LANES   = 2 * M,
  localparam int unsigned LW      = $clog2(LANES),
  localparam int unsigned IBW     = (IB_DEPTH > 1) ? $clog2(IB_DEPTH) : 1,
  localparam int unsigned OBW     = (OB_DEPTH > 1) ? $clog2(OB_DEPTH) : 1,
  localparam int unsigned LPE_WW  = M * LPE_IW,
  localparam int unsigned SW_WW   = LANES * SW,
  localparam int unsigned IQW     = (LPE_WW > SW_WW) ? LPE_WW : SW_WW,
  localparam int unsigned SRD     = T_C * N + 3
) (
  input  logic           clk,
  input  logic           rst_n,
  // instruction queue write port
  input  logic           iq_we,
  input  iq_kind_e       iq_kind,
  input  logic [NW-1:0]  iq_lpv,
  input  logic [AW-1:0]  iq_addr,
  input  logic [IQW-1:0] iq_wdata,
  // input data buffer write port
  input  logic           ib_we,
  input  logic [IBW-1:0] ib_addr,
  input  logic [LW-1:0]  ib_lane,
  input  logic [W-1:0]   ib_wdata,
  // output data buffer read port
  input  logic [OBW-1:0] ob_raddr,
  input  logic [LW-1:0]  ob_rlane,
  output logic [W-1:0]   ob_rdata,
  // run control
  input  logic           start,
  input  logic [AW:0]    len,
  output logic           busy,
  output logic           done
);

  // ---------------- address generation ----------------
  logic          inc_busy, inc_valid, inc_last;
  logic [AW-1:0] inc_addr;
  logic          sr_vld  [SRD];
  logic [AW-1:0] sr_addr [SRD];
  logic [AW:0]   len_q;

  read_addr_incrementor #(.AW(AW)) u_inc (
    .clk(clk), .rst_n(rst_n), .start(start && !busy), .len(len),
    .busy(inc_busy), .addr_valid(inc_valid), .addr(inc_addr), .last(inc_last)
  );

  read_addr_shift_reg #(.AW(AW), .DEPTH(SRD)) u_sr (
    .clk(clk), .rst_n(rst_n), .in_valid(inc_valid), .in_addr(inc_addr),
    .vld(sr_vld), .addr(sr_addr)
  );

  // ---------------- run control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      len_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start && len != 0) begin
        busy  <= 1'b1;
        len_q <= len;
      end else if (busy && sr_vld[SRD-1] && ({1'b0, sr_addr[SRD-1]} == len_q - 1'b1)) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // ---------------- input stage ----------------
  localparam int unsigned ICW = $bits(in_ctl_t);
  localparam int unsigned OCW = $bits(out_ctl_t);
  logic [ICW-1:0] ictl_word;
  logic [OCW-1:0] octl_word;
  in_ctl_t        ictl;
  out_ctl_t       octl;
  in_src_e        src_q;
  logic [W-1:0]   ib_rd_data [LANES];
  logic [W-1:0]   rc_data    [LANES];
  logic [IBW-1:0] ib_ptr;
  logic           ib_rd, rc_rd;

  instr_queue #(.DEPTH(IQ_DEPTH), .WIDTH(ICW)) u_in_iq (
    .clk(clk), .we(iq_we && iq_kind == IQ_IN), .waddr(iq_addr),
    .wdata(iq_wdata[ICW-1:0]), .raddr(sr_addr[0]), .rdata(ictl_word)
  );
  assign ictl = in_ctl_t'(ictl_word);

  assign ib_rd = sr_vld[1] && ictl.src == SRC_IBUF;
  assign rc_rd = sr_vld[1] && ictl.src == SRC_OBUF;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         src_q <= SRC_NONE;
    else if (sr_vld[1]) src_q <= ictl.src;
    else                src_q <= SRC_NONE;
  end

  input_data_buffer #(.DEPTH(IB_DEPTH), .LANES(LANES), .W(W)) u_ibuf (
    .clk(clk), .rst_n(rst_n),
    .wr_en(ib_we), .wr_addr(ib_addr), .wr_lane(ib_lane), .wr_data(ib_wdata),
    .rewind(start && !busy), .rd_en(ib_rd), .rd_data(ib_rd_data), .rd_ptr(ib_ptr)
  );

  // ---------------- LPV pipeline ----------------
  logic         blk_vld  [N+1];
  logic [W-1:0] blk_opnd [N+1][LANES];

  assign blk_vld[0] = sr_vld[2];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      unique case (src_q)
        SRC_IBUF: blk_opnd[0][l] = ib_rd_data[l];
        SRC_OBUF: blk_opnd[0][l] = rc_data[l];
        default:  blk_opnd[0][l] = '0;
      endcase
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_blk
    lpu_block #(.M(M), .W(W), .IQ_DEPTH(IQ_DEPTH)) u_blk (
      .clk(clk), .rst_n(rst_n),
      .lpe_we   (iq_we && iq_kind == IQ_LPE && iq_lpv == NW'(i)),
      .sw_we    (iq_we && iq_kind == IQ_SW  && iq_lpv == NW'(i)),
      .iq_waddr (iq_addr),
      .lpe_wdata(iq_wdata[LPE_WW-1:0]),
      .sw_wdata (iq_wdata[SW_WW-1:0]),
      .lpe_raddr(sr_addr[T_C*i + 1]),
      .sw_raddr (sr_addr[T_C*i + 2]),
      .in_valid (blk_vld[i]),
      .in_opnd  (blk_opnd[i]),
      .out_valid(blk_vld[i+1]),
      .out_opnd (blk_opnd[i+1])
    );
  end

  // ---------------- output stage ----------------
  instr_queue #(.DEPTH(IQ_DEPTH), .WIDTH(OCW)) u_out_iq (
    .clk(clk), .we(iq_we && iq_kind == IQ_OUT), .waddr(iq_addr),
    .wdata(iq_wdata[OCW-1:0]), .raddr(sr_addr[SRD-2]), .rdata(octl_word)
  );
  assign octl = out_ctl_t'(octl_word);

  output_data_buffer #(.DEPTH(OB_DEPTH), .LANES(LANES), .W(W)) u_obuf (
    .clk(clk),
    .wr_en(blk_vld[N] && octl.store), .wr_addr(octl.obuf_addr[OBW-1:0]),
    .wr_data(blk_opnd[N]),
    .rc_en(rc_rd), .rc_addr(ictl.obuf_addr[OBW-1:0]), .rc_data(rc_data),
    .hr_addr(ob_raddr), .hr_lane(ob_rlane), .hr_data(ob_rdata)
  );

  // The last block's output wave is the wave at the end of the shift register.
  assert property (@(posedge clk) disable iff (!rst_n) blk_vld[N] == sr_vld[SRD-1]);

endmodule
