// instr_queue: one instruction queue (instruction memory) of the LPU.
//
// A simple dual-port memory: the host writes instruction words through the
// write port; the pipeline reads one word per cycle at the address supplied
// by the read address shift register. The read is synchronous (rdata is the
// word at the address presented on the previous cycle), so a stage reads its
// queue with the address of the stage before it, which is how the paper
// describes the queues ("each memory takes the read address from its
// predecessor every cycle"). Depth and width are parameters; the depth is
// not given in the paper.
module instr_queue #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
