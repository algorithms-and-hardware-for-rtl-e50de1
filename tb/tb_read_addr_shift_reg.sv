// tb_read_addr_shift_reg: self-checking test of the read address shift register.
//
// Feeds a random address and valid flag every cycle and checks that every
// entry k shows the value fed k+1 cycles earlier, and that reset clears the
// valid flags.
module tb_read_addr_shift_reg;
  localparam int unsigned AW = 6;
  localparam int unsigned DEPTH = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0;
  logic [AW-1:0] in_addr = '0;
  logic vld [DEPTH];
  logic [AW-1:0] addr [DEPTH];

  read_addr_shift_reg #(.AW(AW), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [AW:0] hist [$];

  initial begin
    repeat (2) @(negedge clk);
    for (int k = 0; k < DEPTH; k++) begin checks++; if (vld[k]) failures++; end
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      in_valid = $urandom_range(1);
      in_addr = AW'($urandom());
      hist.push_front({in_valid, in_addr});
      @(negedge clk);
      for (int k = 0; k < DEPTH && k < hist.size(); k++) begin
        checks++;
        if ({vld[k], addr[k]} !== hist[k]) begin
          failures++;
          if (failures < 10) $display("t=%0d entry %0d = %0b/%0d expected %0h", t, k, vld[k], addr[k], hist[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
