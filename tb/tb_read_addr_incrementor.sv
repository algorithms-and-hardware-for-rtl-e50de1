// tb_read_addr_incrementor: self-checking test of the read address counter.
//
// Launches runs of several lengths (including 1 and the maximum) and checks
// that each issues exactly len addresses 0..len-1 on consecutive cycles,
// starting the cycle after start, that last marks the final one, that a
// start during a run is ignored and that len = 0 issues nothing.
module tb_read_addr_incrementor;
  localparam int unsigned AW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0;
  logic [AW:0] len = '0;
  logic busy, addr_valid, last;
  logic [AW-1:0] addr;

  read_addr_incrementor #(.AW(AW)) dut (.*);

  int checks = 0, failures = 0;

  task automatic run(int n);
    @(negedge clk); start = 1; len = (AW+1)'(n);
    @(negedge clk); start = 0;
    for (int k = 0; k < n; k++) begin
      checks++;
      if (!addr_valid || addr != AW'(k) || last != (k == n - 1)) begin
        failures++;
        $display("len=%0d k=%0d valid=%0b addr=%0d last=%0b", n, k, addr_valid, addr, last);
      end
      if (k == 1) start = 1;  // must be ignored
      @(negedge clk); start = 0;
    end
    checks++;
    if (addr_valid || busy) begin failures++; $display("len=%0d: still valid after run", n); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(1); run(5); run(16); run(3);
    @(negedge clk); start = 1; len = '0;
    @(negedge clk); start = 0;
    checks++;
    if (addr_valid) failures++;
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
