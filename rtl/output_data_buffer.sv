// output_data_buffer: collects the results leaving the last LPV.
//
// Each entry is one operand vector (LANES operands of W bits) as delivered by
// the last switch network. A wave whose output control word says store is
// written whole at its buffer address. The buffer serves two readers: the
// recirculation port feeds an entry back to LPV 0 when a subgraph is deeper
// than the LPU (the paper's handling of the depth issue, in which this buffer
// acts as the snapshot registers of the missing LPV after the last one), and
// the host port reads single operands, for example the primary outputs.
// Both reads are synchronous (one cycle). Port structure and widths are this
// design's choice.
module output_data_buffer #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned LANES = 64,
  parameter int unsigned W     = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic          clk,
  // pipeline write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data [LANES],
  // recirculation read port
  input  logic          rc_en,
  input  logic [AW-1:0] rc_addr,
  output logic [W-1:0]  rc_data [LANES],
  // host read port
  input  logic [AW-1:0] hr_addr,
  input  logic [LW-1:0] hr_lane,
  output logic [W-1:0]  hr_data
);

  logic [W-1:0] mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rc_en) rc_data <= mem[rc_addr];
    hr_data <= mem[hr_addr][hr_lane];
  end

endmodule
