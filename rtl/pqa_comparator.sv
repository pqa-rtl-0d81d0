// pqa_comparator: the "Compare" unit of a distance-calculator lane. Each valid
// cycle it receives NP_VEC distances for prototypes pgrp*NP_VEC .. +NP_VEC-1,
// ignores those whose index is >= np, finds the smallest and compares it with
// the minimum cached from earlier prototype groups of the same subspace.
// On the group flagged last it outputs the index of the closest prototype
// (idx_valid high one cycle later). Ties keep the lower index.
// The cached running minimum follows the paper; tie rule and timing are this
// design's choice.
module pqa_comparator #(
  parameter int unsigned NP_VEC = 16,
  parameter int unsigned NP_MAX = 32,
  parameter int unsigned DIST_W = 34,
  localparam int unsigned IDX_W = $clog2(NP_MAX)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         in_valid,
  input  logic                         first,     // first prototype group
  input  logic                         last,      // last prototype group
  input  logic [7:0]                   pgrp,      // prototype group number
  input  logic [7:0]                   np,        // prototypes in use
  input  logic [NP_VEC-1:0][DIST_W-1:0] dists,
  output logic                         idx_valid,
  output logic [IDX_W-1:0]             idx,
  output logic [DIST_W-1:0]            min_dist
);
  logic [DIST_W-1:0] best_d, cache_d;
  logic [IDX_W-1:0]  best_i, cache_i;
  logic              best_ok;

  always_comb begin
    best_ok = 1'b0;
    best_d  = '1;
    best_i  = '0;
    for (int k = 0; k < NP_VEC; k++) begin
      int unsigned p;
      p = int'(pgrp) * NP_VEC + k;
      if (p < int'(np) && p < NP_MAX && (!best_ok || dists[k] < best_d)) begin
        best_ok = 1'b1;
        best_d  = dists[k];
        best_i  = IDX_W'(p);
      end
    end
    // merge with the minimum cached from earlier groups (earlier = lower index)
    if (!first && !(best_ok && best_d < cache_d)) begin
      best_d = cache_d;
      best_i = cache_i;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cache_d   <= '1;
      cache_i   <= '0;
      idx_valid <= 1'b0;
      idx       <= '0;
      min_dist  <= '0;
    end else begin
      idx_valid <= in_valid && last;
      if (in_valid) begin
        cache_d <= best_d;
        cache_i <= best_i;
        if (last) begin
          idx      <= best_i;
          min_dist <= best_d;
        end
      end
    end
  end
endmodule
