// read_addr_incrementor: issues the instruction queue read addresses.
//
// A pulse on start launches a run of len addresses 0, 1, ..., len-1, one per
// cycle, each marked valid; the first address appears the cycle after start.
// Every address starts one wave of data through the LPU pipeline, and every
// stage of the pipeline later reads its instruction queue at that address.
// last marks the final address of the run. start is ignored while a run is
// in progress and a run with len = 0 issues nothing. The counter named in the
// paper's instruction queue figure is the source of this block; its start
// and length interface is this design's choice.
module read_addr_incrementor #(
  parameter int unsigned AW = 10
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [AW:0] len,
  output logic        busy,
  output logic        addr_valid,
  output logic [AW-1:0] addr,
  output logic        last
);

  logic [AW:0] cnt_q, len_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      cnt_q <= '0;
      len_q <= '0;
    end else if (!busy) begin
      if (start && len != 0) begin
        busy  <= 1'b1;
        cnt_q <= '0;
        len_q <= len;
      end
    end else begin
      cnt_q <= cnt_q + 1'b1;
      if (cnt_q + 1'b1 == len_q) busy <= 1'b0;
    end
  end

  assign addr_valid = busy;
  assign addr       = cnt_q[AW-1:0];
  assign last       = busy && (cnt_q + 1'b1 == len_q);

endmodule
