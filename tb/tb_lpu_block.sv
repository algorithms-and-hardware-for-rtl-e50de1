// tb_lpu_block: self-checking test of one LPV stage with its switch network.
//
// Loads random LPE instructions and routing words into the block's two
// instruction queues, then streams one wave per cycle (random operands,
// random program address, some idle cycles). The LPE queue is addressed one
// cycle ahead of the wave and the switch queue in the wave's own cycle, as
// the read address shift register does in the LPU. Each wave's routed
// operands must appear exactly T_C = 6 cycles after it entered, equal to a
// reference that evaluates the gates (with snapshot registers) and the
// routing here.
module tb_lpu_block;
  import lpu_pkg::*;
  localparam int unsigned M = 4;
  localparam int unsigned W = 2 * M;
  localparam int unsigned D = 16;
  localparam int unsigned AW = $clog2(D);
  localparam int unsigned SW = $clog2(M);
  localparam int unsigned LPE_WW = M * LPE_IW;
  localparam int unsigned SW_WW = 2 * M * SW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lpe_we = 0, sw_we = 0;
  logic [AW-1:0] iq_waddr = '0, lpe_raddr = '0, sw_raddr = '0;
  logic [LPE_WW-1:0] lpe_wdata = '0;
  logic [SW_WW-1:0] sw_wdata = '0;
  logic in_valid = 0, out_valid;
  logic [W-1:0] in_opnd [2*M];
  logic [W-1:0] out_opnd [2*M];

  lpu_block #(.M(M), .W(W), .IQ_DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  lpe_instr_t lp [D][M];
  int         sp [D][2*M];
  logic [W-1:0] sa [M], sb [M];
  logic [W-1:0] exp_q [T_C+1][2*M];
  logic         expv_q [T_C+1];

  initial begin
    for (int j = 0; j < M; j++) begin sa[j] = '0; sb[j] = '0; end
    for (int s = 0; s <= T_C; s++) begin expv_q[s] = 0; for (int d = 0; d < 2*M; d++) exp_q[s][d] = '0; end
    for (int l = 0; l < 2*M; l++) in_opnd[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < D; a++) begin
      @(negedge clk); lpe_we = 1; sw_we = 1; iq_waddr = AW'(a);
      for (int j = 0; j < M; j++) begin
        lp[a][j].op = lpe_op_e'($urandom_range(0, 6));
        lp[a][j].snap_a = $urandom_range(1); lp[a][j].snap_b = $urandom_range(1);
        lp[a][j].use_snap_a = $urandom_range(1); lp[a][j].use_snap_b = $urandom_range(1);
        lpe_wdata[j*LPE_IW +: LPE_IW] = lp[a][j];
      end
      for (int d = 0; d < 2*M; d++) begin sp[a][d] = $urandom_range(M - 1); sw_wdata[d*SW +: SW] = SW'(sp[a][d]); end
    end
    @(negedge clk); lpe_we = 0; sw_we = 0;
    // wave pipeline: next_addr is presented one cycle before its wave
    begin
      logic [AW-1:0] next_addr;
      logic next_v;
      logic [W-1:0] r [M];
      next_addr = AW'($urandom_range(D - 1)); next_v = 1;
      lpe_raddr = next_addr;
      for (int t = 0; t < 1500; t++) begin
        @(negedge clk);
        // shift the expectation pipeline and check the output
        for (int s = T_C; s > 0; s--) begin expv_q[s] = expv_q[s-1]; exp_q[s] = exp_q[s-1]; end
        if (t > int'(T_C)) begin
          checks++;
          if (out_valid !== expv_q[T_C]) failures++;
          for (int d = 0; d < 2*M; d++) begin
            checks++;
            if (out_opnd[d] !== exp_q[T_C][d]) begin
              failures++;
              if (failures < 10) $display("t=%0d out[%0d]=%h expected %h", t, d, out_opnd[d], exp_q[T_C][d]);
            end
          end
        end
        // the wave announced last cycle enters now
        in_valid = next_v;
        sw_raddr = next_addr;
        for (int l = 0; l < 2*M; l++) in_opnd[l] = W'($urandom());
        for (int j = 0; j < M; j++) begin
          lpe_instr_t ins;
          logic [W-1:0] x, z;
          ins = lp[next_addr][j];
          x = ins.use_snap_a ? sa[j] : in_opnd[2*j];
          z = ins.use_snap_b ? sb[j] : in_opnd[2*j+1];
          if (!next_v) r[j] = '0;
          else case (ins.op)
            OP_BUF:  r[j] = x;
            OP_NOT:  r[j] = ~x;
            OP_AND:  r[j] = x & z;
            OP_OR:   r[j] = x | z;
            OP_XOR:  r[j] = x ^ z;
            OP_XNOR: r[j] = ~(x ^ z);
            default: r[j] = '0;
          endcase
          if (next_v && ins.snap_a) sa[j] = in_opnd[2*j];
          if (next_v && ins.snap_b) sb[j] = in_opnd[2*j+1];
        end
        for (int d = 0; d < 2*M; d++) exp_q[0][d] = next_v ? r[sp[next_addr][d]] : '0;
        expv_q[0] = next_v;
        // announce the next wave
        next_addr = AW'($urandom_range(D - 1));
        next_v = ($urandom_range(7) != 0);
        lpe_raddr = next_addr;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
