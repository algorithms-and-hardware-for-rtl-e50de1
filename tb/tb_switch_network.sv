// tb_switch_network: self-checking test of the LPV-to-LPV interconnect.
//
// Sends a random wave with random routing every cycle into a network of 8
// inputs and 16 outputs and checks, exactly 5 cycles later (the paper's
// switch latency), that every output carries the input it selected, that
// invalid waves deliver zeros and that the valid flag is delayed by 5.
// Routing with repeated sources (multicast) is counted and must occur.
module tb_switch_network;
  import lpu_pkg::*;
  localparam int unsigned M = 8;
  localparam int unsigned W = 16;
  localparam int unsigned S = 5;
  localparam int unsigned SW = $clog2(M);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, out_valid;
  logic [W-1:0]  in_data [M];
  logic [SW-1:0] sel [2*M];
  logic [W-1:0]  out_data [2*M];

  switch_network #(.M(M), .W(W), .STAGES(S)) dut (.*);

  int checks = 0, failures = 0, multicasts = 0;
  logic [W-1:0] exp_d [S+1][2*M];
  logic         exp_v [S+1];

  initial begin
    for (int s = 0; s <= S; s++) begin
      exp_v[s] = 0;
      for (int d = 0; d < 2*M; d++) exp_d[s][d] = '0;
    end
    for (int j = 0; j < M; j++) in_data[j] = '0;
    for (int d = 0; d < 2*M; d++) sel[d] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      // expected output is what was applied S cycles ago
      for (int s = S; s > 0; s--) begin exp_v[s] = exp_v[s-1]; exp_d[s] = exp_d[s-1]; end
      if (t > S) begin
        checks++;
        if (out_valid !== exp_v[S]) failures++;
        for (int d = 0; d < 2*M; d++) begin
          checks++;
          if (out_data[d] !== exp_d[S][d]) begin
            failures++;
            if (failures < 10) $display("t=%0d out[%0d]=%h expected %h", t, d, out_data[d], exp_d[S][d]);
          end
        end
      end
      in_valid = ($urandom_range(5) != 0);
      for (int j = 0; j < M; j++) in_data[j] = W'($urandom());
      for (int d = 0; d < 2*M; d++) sel[d] = SW'($urandom_range(M - 1));
      for (int d = 0; d < 2*M; d++) begin
        exp_d[0][d] = in_valid ? in_data[sel[d]] : '0;
        for (int e = 0; e < d; e++) if (sel[e] == sel[d]) begin multicasts++; break; end
      end
      exp_v[0] = in_valid;
      // index 0 is the wave applied now; it reaches the outputs S edges later
    end
    checks++;
    if (multicasts == 0) failures++;
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
