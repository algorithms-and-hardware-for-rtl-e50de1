// lpv: logic processing vector, a column of M LPEs working on one logic level.
//
// The LPV receives 2M operands of W bits; LPE j takes operands 2j and 2j+1
// and produces result j, so one LPV evaluates up to M gates of one logic
// level per cycle. The per-LPE instructions arrive together as one word from
// this LPV's instruction queue. Results are registered (one cycle latency)
// inside the LPEs. The arrangement of M LPEs with two inputs each follows the
// paper; the pairing of operands to LPEs is this design's choice.
module lpv
  import lpu_pkg::*;
#(
  parameter int unsigned M = M_LPE_DEF,
  parameter int unsigned W = 2 * M
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] opnd  [2*M],
  input  lpe_instr_t   instr [M],
  output logic         out_valid,
  output logic [W-1:0] res   [M]
);

  for (genvar j = 0; j < M; j++) begin : g_lpe
    lpe #(.W(W)) u_lpe (
      .clk     (clk),
      .rst_n   (rst_n),
      .in_valid(in_valid),
      .a       (opnd[2*j]),
      .b       (opnd[2*j+1]),
      .instr   (instr[j]),
      .y       (res[j])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
