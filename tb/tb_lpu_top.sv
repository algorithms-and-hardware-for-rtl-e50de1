// tb_lpu_top: end-to-end self-checking test of lpu_top at reduced size (3 LPVs of 4 LPEs).
//
// The test generates a random program (LPE instructions, switch routing,
// input and output control for every address), random input data, loads
// them through the host ports, runs the program twice and compares every
// output buffer entry with a reference model written here. The model walks
// the waves in address order and, for each wave, the LPVs in order; that is
// enough to reproduce the hardware because a wave only sees snapshot values
// stored by earlier waves. Output buffer writes are applied to the model's
// buffer only once the hardware would have committed them (6*N+2 addresses
// later), and recirculated reads are only programmed for entries that are
// complete by then. The run time from start to done is checked against
// len + 6*N + 4. Each mechanism (snapshot store, snapshot use, invalidate,
// multicast routing, input buffer read, output buffer store, recirculation,
// NOT/BUFFER and two-input gates) is counted and must occur.
module tb_lpu_top;
  import lpu_pkg::*;

  localparam int unsigned N   = 3;
  localparam int unsigned M   = 4;
  localparam int unsigned IQD = 64;
  localparam int unsigned IBD = 32;
  localparam int unsigned OBD = 8;
  localparam int unsigned L   = 60;
  localparam int unsigned W   = 2 * M;
  localparam int unsigned LN  = 2 * M;
  localparam int unsigned AW  = $clog2(IQD);
  localparam int unsigned NW  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned SW  = $clog2(M);
  localparam int unsigned LPE_WW = M * LPE_IW;
  localparam int unsigned SW_WW  = LN * SW;
  localparam int unsigned IQW = (LPE_WW > SW_WW) ? LPE_WW : SW_WW;
  localparam int unsigned GAP = T_C * N + 2;
  localparam int unsigned RUN_CYCLES = L + T_C * N + 4;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           iq_we = 1'b0;
  iq_kind_e       iq_kind = IQ_LPE;
  logic [NW-1:0]  iq_lpv = '0;
  logic [AW-1:0]  iq_addr = '0;
  logic [IQW-1:0] iq_wdata = '0;
  logic           ib_we = 1'b0;
  logic [$clog2(IBD)-1:0] ib_addr = '0;
  logic [$clog2(LN)-1:0]  ib_lane = '0;
  logic [W-1:0]   ib_wdata = '0;
  logic [$clog2(OBD)-1:0] ob_raddr = '0;
  logic [$clog2(LN)-1:0]  ob_rlane = '0;
  logic [W-1:0]   ob_rdata;
  logic           start = 1'b0;
  logic [AW:0]    len = '0;
  logic           busy, done;

  lpu_top #(.N(N), .M(M), .IQ_DEPTH(IQD), .IB_DEPTH(IBD), .OB_DEPTH(OBD)) dut (.*);

  int checks = 0, failures = 0;

  // program and reference state
  lpe_instr_t lpe_p [N][L][M];
  int         sw_p  [N][L][LN];
  in_ctl_t    ic_p  [L];
  out_ctl_t   oc_p  [L];
  logic [W-1:0] ib_m  [IBD][LN];
  logic [W-1:0] ob_m  [OBD][LN];
  bit           ob_ok [OBD];
  int           first_wr [OBD];
  logic [W-1:0] sa_m [N][M], sb_m [N][M];
  logic [W-1:0] pend [L][LN];
  int n_ibuf_waves;

  // mechanism counters
  int c_snap_store = 0, c_snap_use = 0, c_inv = 0, c_multicast = 0;
  int c_siso = 0, c_miso = 0, c_ib = 0, c_rc = 0, c_store = 0;

  function automatic logic [W-1:0] rnd_w();
    logic [W-1:0] v;
    v = '0;
    for (int k = 0; k < W; k += 32) v = (v << 32) | W'($urandom());
    return v;
  endfunction

  function automatic logic [W-1:0] gate(lpe_op_e op, logic [W-1:0] x, logic [W-1:0] y);
    case (op)
      OP_BUF:  return x;
      OP_NOT:  return ~x;
      OP_AND:  return x & y;
      OP_OR:   return x | y;
      OP_XOR:  return x ^ y;
      OP_XNOR: return ~(x ^ y);
      default: return '0;
    endcase
  endfunction

  task automatic gen_program();
    int rd_ptr = 0;
    for (int a = 0; a < OBD; a++) begin ob_ok[a] = 0; first_wr[a] = -1; end
    for (int a = 0; a < int'(L); a++) begin
      int r = $urandom_range(99);
      // output control
      oc_p[a].store = ($urandom_range(99) < 60);
      oc_p[a].obuf_addr = BUF_AW'($urandom_range(OBD - 1));
      if (a == int'(L) - 1) oc_p[a].store = 1'b1;
      // input control
      ic_p[a].src = SRC_IBUF;
      ic_p[a].obuf_addr = '0;
      if (r < 15) ic_p[a].src = SRC_NONE;
      else if (r < 50 && rd_ptr < int'(IBD)) ic_p[a].src = SRC_IBUF;
      else begin
        int cand[$];
        for (int o = 0; o < int'(OBD); o++)
          if (first_wr[o] >= 0 && first_wr[o] <= a - int'(GAP)) cand.push_back(o);
        if (cand.size() > 0) begin
          ic_p[a].src = SRC_OBUF;
          ic_p[a].obuf_addr = BUF_AW'(cand[$urandom_range(cand.size() - 1)]);
        end else if (rd_ptr < int'(IBD)) ic_p[a].src = SRC_IBUF;
        else ic_p[a].src = SRC_NONE;
      end
      if (ic_p[a].src == SRC_IBUF) rd_ptr++;
      if (oc_p[a].store && first_wr[oc_p[a].obuf_addr] < 0) first_wr[oc_p[a].obuf_addr] = a;
      for (int i = 0; i < int'(N); i++) begin
        for (int j = 0; j < int'(M); j++) begin
          int q = $urandom_range(99);
          lpe_p[i][a][j].op = (q < 10) ? OP_INV : lpe_op_e'($urandom_range(1, 6));
          lpe_p[i][a][j].snap_a     = ($urandom_range(99) < 20);
          lpe_p[i][a][j].snap_b     = ($urandom_range(99) < 20);
          lpe_p[i][a][j].use_snap_a = ($urandom_range(99) < 20);
          lpe_p[i][a][j].use_snap_b = ($urandom_range(99) < 20);
        end
        for (int d = 0; d < int'(LN); d++) sw_p[i][a][d] = $urandom_range(M - 1);
      end
    end
    n_ibuf_waves = rd_ptr;
    for (int e = 0; e < int'(IBD); e++)
      for (int l = 0; l < int'(LN); l++) ib_m[e][l] = rnd_w();
  endtask

  // Reference model of one complete run; state (snapshots, buffer) carries over.
  task automatic model_run();
    int ptr = 0;
    int next_commit = 0;
    logic [W-1:0] op [LN];
    logic [W-1:0] res [M];
    for (int a = 0; a < int'(L); a++) begin
      // commit stores whose hardware write precedes this wave's read
      while (next_commit <= a - int'(GAP)) begin
        if (oc_p[next_commit].store) begin
          for (int l = 0; l < int'(LN); l++) ob_m[oc_p[next_commit].obuf_addr][l] = pend[next_commit][l];
          ob_ok[oc_p[next_commit].obuf_addr] = 1;
        end
        next_commit++;
      end
      for (int l = 0; l < int'(LN); l++) begin
        case (ic_p[a].src)
          SRC_IBUF: op[l] = ib_m[ptr][l];
          SRC_OBUF: op[l] = ob_m[ic_p[a].obuf_addr][l];
          default:  op[l] = '0;
        endcase
      end
      if (ic_p[a].src == SRC_IBUF) begin ptr++; c_ib++; end
      if (ic_p[a].src == SRC_OBUF) c_rc++;
      for (int i = 0; i < int'(N); i++) begin
        for (int j = 0; j < int'(M); j++) begin
          lpe_instr_t ins = lpe_p[i][a][j];
          logic [W-1:0] x = ins.use_snap_a ? sa_m[i][j] : op[2*j];
          logic [W-1:0] y = ins.use_snap_b ? sb_m[i][j] : op[2*j+1];
          res[j] = gate(ins.op, x, y);
          if (ins.snap_a) begin sa_m[i][j] = op[2*j];   c_snap_store++; end
          if (ins.snap_b) begin sb_m[i][j] = op[2*j+1]; c_snap_store++; end
          if (ins.use_snap_a || ins.use_snap_b) c_snap_use++;
          if (ins.op == OP_INV) c_inv++;
          else if (ins.op == OP_BUF || ins.op == OP_NOT) c_siso++;
          else c_miso++;
        end
        for (int d = 0; d < int'(LN); d++) begin
          op[d] = res[sw_p[i][a][d]];
          for (int e = 0; e < d; e++) if (sw_p[i][a][e] == sw_p[i][a][d]) begin c_multicast++; break; end
        end
      end
      for (int l = 0; l < int'(LN); l++) pend[a][l] = op[l];
      if (oc_p[a].store) c_store++;
    end
    while (next_commit < int'(L)) begin
      if (oc_p[next_commit].store) begin
        for (int l = 0; l < int'(LN); l++) ob_m[oc_p[next_commit].obuf_addr][l] = pend[next_commit][l];
        ob_ok[oc_p[next_commit].obuf_addr] = 1;
      end
      next_commit++;
    end
  endtask

  task automatic load();
    logic [IQW-1:0] wd;
    for (int a = 0; a < int'(L); a++) begin
      for (int i = 0; i < int'(N); i++) begin
        wd = '0;
        for (int j = 0; j < int'(M); j++) wd[j*LPE_IW +: LPE_IW] = lpe_p[i][a][j];
        @(negedge clk); iq_we = 1; iq_kind = IQ_LPE; iq_lpv = NW'(i); iq_addr = AW'(a); iq_wdata = wd;
        wd = '0;
        for (int d = 0; d < int'(LN); d++) wd[d*SW +: SW] = SW'(sw_p[i][a][d]);
        @(negedge clk); iq_kind = IQ_SW; iq_wdata = wd;
      end
      @(negedge clk); iq_kind = IQ_IN;  iq_lpv = '0; iq_wdata = IQW'(ic_p[a]);
      @(negedge clk); iq_kind = IQ_OUT; iq_wdata = IQW'(oc_p[a]);
    end
    @(negedge clk); iq_we = 0;
    for (int e = 0; e < n_ibuf_waves; e++)
      for (int l = 0; l < int'(LN); l++) begin
        @(negedge clk); ib_we = 1; ib_addr = e[$clog2(IBD)-1:0]; ib_lane = l[$clog2(LN)-1:0]; ib_wdata = ib_m[e][l];
      end
    @(negedge clk); ib_we = 0;
  endtask

  task automatic run_and_check(int run);
    int cyc = 0;
    @(negedge clk); start = 1; len = (AW+1)'(L);
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != int'(RUN_CYCLES)) begin
      failures++; $display("run %0d: done after %0d cycles, expected %0d", run, cyc, RUN_CYCLES);
    end
    model_run();
    for (int o = 0; o < int'(OBD); o++) begin
      if (!ob_ok[o]) continue;
      for (int l = 0; l < int'(LN); l++) begin
        ob_raddr = o[$clog2(OBD)-1:0]; ob_rlane = l[$clog2(LN)-1:0];
        @(negedge clk);
        checks++;
        if (ob_rdata !== ob_m[o][l]) begin
          failures++;
          if (failures < 10) $display("run %0d obuf[%0d][%0d] = %h expected %h", run, o, l, ob_rdata, ob_m[o][l]);
        end
      end
    end
  endtask

  // hardware-side event counts
  int h_ib = 0, h_rc = 0, h_st = 0;
  always @(posedge clk) begin
    if (rst_n && dut.ib_rd) h_ib++;
    if (rst_n && dut.rc_rd) h_rc++;
    if (rst_n && dut.blk_vld[N] && dut.octl.store) h_st++;
  end

  initial begin
    for (int i = 0; i < int'(N); i++)
      for (int j = 0; j < int'(M); j++) begin sa_m[i][j] = '0; sb_m[i][j] = '0; end
    gen_program();
    repeat (3) @(negedge clk);
    rst_n = 1;
    load();
    run_and_check(0);
    run_and_check(1);
    // every mechanism must have happened
    checks += 9;
    if (c_snap_store == 0) begin failures++; $display("no snapshot store"); end
    if (c_snap_use   == 0) begin failures++; $display("no snapshot use"); end
    if (c_inv        == 0) begin failures++; $display("no invalidate"); end
    if (c_multicast  == 0) begin failures++; $display("no multicast"); end
    if (c_siso == 0 || c_miso == 0) begin failures++; $display("missing gate class"); end
    if (h_ib == 0 || h_ib != c_ib) begin failures++; $display("input buffer reads %0d vs %0d", h_ib, c_ib); end
    if (h_rc == 0 || h_rc != c_rc) begin failures++; $display("recirculations %0d vs %0d", h_rc, c_rc); end
    if (h_st == 0 || h_st != c_store) begin failures++; $display("stores %0d vs %0d", h_st, c_store); end
    if (busy) begin failures++; $display("busy after done"); end
    $display("mechanisms: snap_store=%0d snap_use=%0d invalidate=%0d multicast=%0d siso=%0d miso=%0d ibuf=%0d recirc=%0d store=%0d",
             c_snap_store, c_snap_use, c_inv, c_multicast, c_siso, c_miso, h_ib, h_rc, h_st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
