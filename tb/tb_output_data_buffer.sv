// tb_output_data_buffer: self-checking test of the output data buffer.
//
// Stores random whole entries, then checks both read ports: recirculation
// reads return whole entries one cycle after rc_en, host reads return single
// operands one cycle after the address; an entry written again is seen with
// its new contents.
module tb_output_data_buffer;
  localparam int unsigned DEPTH = 8;
  localparam int unsigned LANES = 8;
  localparam int unsigned W = 16;
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned LW = $clog2(LANES);

  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rc_en = 0;
  logic [AW-1:0] wr_addr = '0, rc_addr = '0, hr_addr = '0;
  logic [LW-1:0] hr_lane = '0;
  logic [W-1:0] wr_data [LANES];
  logic [W-1:0] rc_data [LANES];
  logic [W-1:0] hr_data;

  output_data_buffer #(.DEPTH(DEPTH), .LANES(LANES), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [DEPTH][LANES];

  task automatic store(int e);
    @(negedge clk); wr_en = 1; wr_addr = AW'(e);
    for (int l = 0; l < LANES; l++) begin wr_data[l] = W'($urandom()); ref_mem[e][l] = wr_data[l]; end
    @(negedge clk); wr_en = 0;
  endtask

  task automatic check_all();
    for (int e = 0; e < DEPTH; e++) begin
      @(negedge clk); rc_en = 1; rc_addr = AW'(e);
      @(negedge clk); rc_en = 0;
      for (int l = 0; l < LANES; l++) begin
        checks++;
        if (rc_data[l] !== ref_mem[e][l]) begin
          failures++;
          if (failures < 10) $display("rc entry %0d lane %0d = %h expected %h", e, l, rc_data[l], ref_mem[e][l]);
        end
      end
      for (int l = 0; l < LANES; l++) begin
        hr_addr = AW'(e); hr_lane = LW'(l);
        @(negedge clk);
        checks++;
        if (hr_data !== ref_mem[e][l]) failures++;
      end
    end
  endtask

  initial begin
    for (int l = 0; l < LANES; l++) wr_data[l] = '0;
    for (int e = 0; e < DEPTH; e++) store(e);
    check_all();
    for (int k = 0; k < 5; k++) store($urandom_range(DEPTH - 1));
    check_all();
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
