// pqa_lut_mem: one partition of the dot-product table LUT_PQ. LUT_PQ is split
// NS_VEC ways by subspace and NOUT_VEC ways by output channel so that all
// NS_VEC x NOUT_VEC partitions can be read in the same cycle. This partition
// holds, for lane l and output slot o, the entries of subspaces g*NS_VEC+l and
// output channels og*NOUT_VEC+o: address = (g * OG_MAX + og) * NP_MAX + p.
// One write and one read port; read data registered (one cycle latency).
// The partitioning is the paper's; address layout and latency are this design's.
module pqa_lut_mem #(
  parameter int unsigned LBITS = 16,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [LBITS-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [LBITS-1:0] rdata
);
  logic [LBITS-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
