// tb_instr_queue: self-checking test of an instruction queue memory.
//
// Fills all 64 words with random data, then issues random reads (mixed with
// further writes to other addresses) and checks that each read returns the
// last word written at that address exactly one cycle after the address.
module tb_instr_queue;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned WIDTH = 24;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;
  logic we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;

  instr_queue #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] ref_mem [DEPTH];
  logic [WIDTH-1:0] exp_q;
  bit have = 0;

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = WIDTH'($urandom()); ref_mem[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (have) begin
        checks++;
        if (rdata !== exp_q) begin
          failures++;
          if (failures < 10) $display("t=%0d rdata=%h expected %h", t, rdata, exp_q);
        end
      end
      raddr = AW'($urandom_range(DEPTH - 1));
      exp_q = ref_mem[raddr];
      have = 1;
      we = $urandom_range(1);
      waddr = AW'($urandom_range(DEPTH - 1));
      if (waddr == raddr) waddr = waddr + 1'b1;
      wdata = WIDTH'($urandom());
      if (we) ref_mem[waddr] = wdata;
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
