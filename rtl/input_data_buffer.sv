// input_data_buffer: holds the primary input operands of the netlist.
//
// Each entry is one full operand vector for LPV 0 (LANES operands of W bits).
// The host fills it one operand at a time before a run. During a run the
// buffer is read strictly in order: a read counter, cleared by rewind,
// supplies the address and advances on every rd_en, and rd_data shows the
// entry one cycle later. The paper states that the compiler lays the
// primary inputs out so that a counter can address them; the sequential
// order, the rewind input and the per-operand write port are this design's.
module input_data_buffer #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned LANES = 64,
  parameter int unsigned W     = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW   = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // host write port
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [LW-1:0] wr_lane,
  input  logic [W-1:0]  wr_data,
  // pipeline read port
  input  logic          rewind,
  input  logic          rd_en,
  output logic [W-1:0]  rd_data [LANES],
  output logic [AW-1:0] rd_ptr
);

  logic [W-1:0] mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr][wr_lane] <= wr_data;
    if (rd_en) rd_data <= mem[rd_ptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      rd_ptr <= '0;
    else if (rewind) rd_ptr <= '0;
    else if (rd_en)  rd_ptr <= rd_ptr + 1'b1;
  end

endmodule
