// pqa_diff_calc: one difference calculator of a distance-calculator lane.
// Each valid cycle it takes LS_VEC input elements and the matching LS_VEC
// elements of one prototype, forms per element |x-b| (L1) or (x-b)^2 (L2),
// adds them and accumulates the sum over the ceil(Ls/LS_VEC) chunks of a
// subspace (the adder with feedback in the paper's block diagram). Elements
// whose enable bit is low (beyond Ls) contribute nothing.
// Timing: in_valid/first/last are sampled with the data; the total distance
// appears on dists with dist_valid one cycle after the chunk flagged last.
// Structure (subtractors, adder, accumulator) follows the paper; the squared
// form of L2 and the run-time metric select are this design's choice.
module pqa_diff_calc
  import pqa_pkg::*;
#(
  parameter int unsigned LS_VEC = 4,
  parameter int unsigned DBITS  = 16,
  parameter int unsigned LS_MAX = 4,
  localparam int unsigned DIST_W = 2*DBITS + $clog2(LS_MAX + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  dist_mode_e              mode,
  input  logic                    in_valid,
  input  logic                    first,      // first chunk of the subspace
  input  logic                    last,       // last chunk of the subspace
  input  logic [LS_VEC-1:0]       elem_en,
  input  logic [LS_VEC-1:0][DBITS-1:0] x,
  input  logic [LS_VEC-1:0][DBITS-1:0] b,
  output logic                    dist_valid,
  output logic [DIST_W-1:0]       dists
);
  logic [DIST_W-1:0] chunk_sum, acc;

  always_comb begin
    chunk_sum = '0;
    for (int e = 0; e < LS_VEC; e++) begin
      logic [DBITS-1:0] d;
      d = (x[e] >= b[e]) ? x[e] - b[e] : b[e] - x[e];
      if (elem_en[e])
        chunk_sum += (mode == DIST_L2) ? DIST_W'(d) * DIST_W'(d) : DIST_W'(d);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc        <= '0;
      dist_valid <= 1'b0;
    end else begin
      dist_valid <= in_valid && last;
      if (in_valid) acc <= first ? chunk_sum : acc + chunk_sum;
    end
  end

  assign dists = acc;
endmodule
