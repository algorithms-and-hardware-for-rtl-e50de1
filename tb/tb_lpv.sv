// tb_lpv: self-checking test of a logic processing vector.
//
// Applies random operand vectors and random instruction vectors to an LPV of
// 8 LPEs and checks all results one cycle later against a reference that
// pairs operands 2j and 2j+1 with LPE j and keeps every snapshot register.
// The wave valid flag must follow in_valid by one cycle.
module tb_lpv;
  import lpu_pkg::*;
  localparam int unsigned M = 8;
  localparam int unsigned W = 2 * M;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [W-1:0] opnd [2*M];
  lpe_instr_t   instr [M];
  logic [W-1:0] res [M];

  lpv #(.M(M), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] sa [M], sb [M], exp_r [M];
  logic exp_v = 0;

  initial begin
    for (int j = 0; j < M; j++) begin sa[j] = '0; sb[j] = '0; exp_r[j] = '0; instr[j] = '0; end
    for (int l = 0; l < 2*M; l++) opnd[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      checks++;
      if (out_valid !== exp_v) failures++;
      for (int j = 0; j < M; j++) begin
        checks++;
        if (res[j] !== exp_r[j]) begin
          failures++;
          if (failures < 10) $display("t=%0d res[%0d]=%h expected %h", t, j, res[j], exp_r[j]);
        end
      end
      in_valid = ($urandom_range(7) != 0);
      for (int l = 0; l < 2*M; l++) opnd[l] = W'($urandom());
      for (int j = 0; j < M; j++) begin
        logic [W-1:0] x, z;
        instr[j].op = lpe_op_e'($urandom_range(0, 6));
        instr[j].snap_a = $urandom_range(1); instr[j].snap_b = $urandom_range(1);
        instr[j].use_snap_a = $urandom_range(1); instr[j].use_snap_b = $urandom_range(1);
        x = instr[j].use_snap_a ? sa[j] : opnd[2*j];
        z = instr[j].use_snap_b ? sb[j] : opnd[2*j+1];
        if (!in_valid) exp_r[j] = '0;
        else case (instr[j].op)
          OP_BUF:  exp_r[j] = x;
          OP_NOT:  exp_r[j] = ~x;
          OP_AND:  exp_r[j] = x & z;
          OP_OR:   exp_r[j] = x | z;
          OP_XOR:  exp_r[j] = x ^ z;
          OP_XNOR: exp_r[j] = ~(x ^ z);
          default: exp_r[j] = '0;
        endcase
        if (in_valid && instr[j].snap_a) sa[j] = opnd[2*j];
        if (in_valid && instr[j].snap_b) sb[j] = opnd[2*j+1];
      end
      exp_v = in_valid;
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
