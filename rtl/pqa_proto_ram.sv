// pqa_proto_ram: the prototypes RAM of one distance-calculator lane. It is split
// into NP_VEC memories, one per difference calculator, so that every cycle each
// difference calculator receives LS_VEC elements of its own prototype. Word
// address = (subspace_group * PG_MAX + prototype_group) * CH_MAX + chunk, where
// prototype p of a subspace lives in memory p % NP_VEC, group p / NP_VEC.
// Write: one word into one memory per cycle. Read: one address for all NP_VEC
// memories, data registered (one cycle latency). Holding the prototypes inside
// the lane follows the paper's block diagram; the organisation is this design's.
module pqa_proto_ram #(
  parameter int unsigned NP_VEC = 16,
  parameter int unsigned LS_VEC = 4,
  parameter int unsigned DBITS  = 16,
  parameter int unsigned DEPTH  = 4,
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KW = (NP_VEC > 1) ? $clog2(NP_VEC) : 1
) (
  input  logic                              clk,
  input  logic                              we,
  input  logic [KW-1:0]                     wsel,    // which difference calculator
  input  logic [AW-1:0]                     waddr,
  input  logic [LS_VEC-1:0][DBITS-1:0]      wdata,
  input  logic [AW-1:0]                     raddr,
  output logic [NP_VEC-1:0][LS_VEC-1:0][DBITS-1:0] rdata
);
  for (genvar k = 0; k < NP_VEC; k++) begin : g_mem
    logic [LS_VEC-1:0][DBITS-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wsel == KW'(k)) mem[waddr] <= wdata;
      rdata[k] <= mem[raddr];
    end
  end
endmodule
