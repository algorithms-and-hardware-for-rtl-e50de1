// tb_lpe: self-checking test of one logic processing element.
//
// Drives random operands and random instructions (every operation, random
// snapshot store/use bits, idle cycles) and compares the registered result
// one cycle later with a reference computed here, including the contents of
// the two snapshot registers kept by the reference.
module tb_lpe;
  import lpu_pkg::*;
  localparam int unsigned W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [W-1:0] a = '0, b = '0, y;
  lpe_instr_t instr = '0;

  lpe #(.W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] sa = '0, sb = '0, exp_y = '0;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      logic [W-1:0] x, z;
      @(negedge clk);
      // check the result of the previous cycle
      checks++;
      if (y !== exp_y) begin
        failures++;
        if (failures < 10) $display("t=%0d y=%h expected %h", t, y, exp_y);
      end
      in_valid = ($urandom_range(9) != 0);
      a = W'($urandom()); b = W'($urandom());
      instr.op = lpe_op_e'($urandom_range(0, 6));
      instr.snap_a = $urandom_range(1); instr.snap_b = $urandom_range(1);
      instr.use_snap_a = $urandom_range(1); instr.use_snap_b = $urandom_range(1);
      x = instr.use_snap_a ? sa : a;
      z = instr.use_snap_b ? sb : b;
      if (!in_valid) exp_y = '0;
      else case (instr.op)
        OP_BUF:  exp_y = x;
        OP_NOT:  exp_y = ~x;
        OP_AND:  exp_y = x & z;
        OP_OR:   exp_y = x | z;
        OP_XOR:  exp_y = x ^ z;
        OP_XNOR: exp_y = ~(x ^ z);
        default: exp_y = '0;
      endcase
      if (in_valid && instr.snap_a) sa = a;
      if (in_valid && instr.snap_b) sb = b;
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
