// switch_network: non-blocking multicast interconnect between two LPVs.
//
// It carries the M results of one LPV to the 2M operand inputs of the next.
// Every output d picks any input sel[d], so one result may feed any number of
// gates of the next level (multicast) and no routing request ever blocks
// another. The paper uses a 5-stage non-blocking multicast multistage network
// from the literature and gives only its function and its 5-cycle latency;
// this design realises the function as a registered full crossbar in the
// first stage followed by STAGES-1 pipeline registers, so the latency is
// STAGES cycles, as in the paper, but the internal topology is not the
// paper's. sel must be valid in the same cycle as in_data (it comes from a
// synchronous instruction queue read one cycle earlier).
module switch_network
  import lpu_pkg::*;
#(
  parameter int unsigned M      = M_LPE_DEF,
  parameter int unsigned W      = 2 * M,
  parameter int unsigned STAGES = T_SW,
  localparam int unsigned SW    = (M > 1) ? $clog2(M) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [W-1:0]  in_data  [M],
  input  logic [SW-1:0] sel      [2*M],
  output logic          out_valid,
  output logic [W-1:0]  out_data [2*M]
);

  logic [W-1:0] stg_q [STAGES][2*M];
  logic         vld_q [STAGES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < STAGES; s++) begin
        vld_q[s] <= 1'b0;
        for (int d = 0; d < 2*M; d++) stg_q[s][d] <= '0;
      end
    end else begin
      vld_q[0] <= in_valid;
      for (int d = 0; d < 2*M; d++)
        stg_q[0][d] <= in_valid ? in_data[sel[d]] : '0;
      for (int s = 1; s < STAGES; s++) begin
        vld_q[s] <= vld_q[s-1];
        stg_q[s] <= stg_q[s-1];
      end
    end
  end

  assign out_valid = vld_q[STAGES-1];
  assign out_data  = stg_q[STAGES-1];

endmodule
