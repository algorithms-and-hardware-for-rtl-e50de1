// tb_input_data_buffer: self-checking test of the input data buffer.
//
// Writes every operand of every entry, then reads with rd_en asserted on
// random cycles and checks that the entries come out in order (the counter),
// one cycle after each read, and that rewind restarts from entry 0.
module tb_input_data_buffer;
  localparam int unsigned DEPTH = 16;
  localparam int unsigned LANES = 8;
  localparam int unsigned W = 16;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(LANES);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rewind = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_ptr;
  logic [LW-1:0] wr_lane = '0;
  logic [W-1:0] wr_data = '0;
  logic [W-1:0] rd_data [LANES];

  input_data_buffer #(.DEPTH(DEPTH), .LANES(LANES), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [DEPTH][LANES];

  task automatic read_seq(int n);
    int e = 0;
    while (e < n) begin
      @(negedge clk);
      rd_en = $urandom_range(1);
      if (rd_en) begin
        @(negedge clk); rd_en = 0;
        for (int l = 0; l < LANES; l++) begin
          checks++;
          if (rd_data[l] !== ref_mem[e][l]) begin
            failures++;
            if (failures < 10) $display("entry %0d lane %0d = %h expected %h", e, l, rd_data[l], ref_mem[e][l]);
          end
        end
        e++;
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < DEPTH; e++)
      for (int l = 0; l < LANES; l++) begin
        @(negedge clk); wr_en = 1; wr_addr = AW'(e); wr_lane = LW'(l);
        wr_data = W'($urandom()); ref_mem[e][l] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    read_seq(10);
    @(negedge clk); rewind = 1;
    @(negedge clk); rewind = 0;
    checks++;
    if (rd_ptr != 0) failures++;
    read_seq(DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
