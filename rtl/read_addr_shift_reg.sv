// read_addr_shift_reg: carries every wave's read address along the pipeline.
//
// Entry 0 takes the incrementor's address each cycle and entry k takes entry
// k-1, so entry k holds the address (and valid flag) of the wave that is k
// cycles into the pipeline. The instruction queue of each pipeline stage is
// read with the entry of the stage before it. A shift register of addresses,
// rather than one address bus, is what lets several subgraphs (one per
// pipeline stage) be in flight at once; this follows the paper's figure of
// the instruction queue configuration. Reset clears the valid flags.
module read_addr_shift_reg #(
  parameter int unsigned AW    = 10,
  parameter int unsigned DEPTH = 6 * 16 + 3
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [AW-1:0] in_addr,
  output logic          vld  [DEPTH],
  output logic [AW-1:0] addr [DEPTH]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < DEPTH; k++) begin
        vld[k]  <= 1'b0;
        addr[k] <= '0;
      end
    end else begin
      vld[0]  <= in_valid;
      addr[0] <= in_addr;
      for (int k = 1; k < DEPTH; k++) begin
        vld[k]  <= vld[k-1];
        addr[k] <= addr[k-1];
      end
    end
  end

endmodule
