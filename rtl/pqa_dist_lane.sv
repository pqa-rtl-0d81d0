// pqa_dist_lane: one distance-calculator lane (one subspace at a time).
// It holds the prototypes RAM of its subspaces, NP_VEC difference calculators
// and a comparator. For a subspace the sequencer issues, for every prototype
// group pg and chunk ch, one cycle with the RAM address; the input chunk x
// (LS_VEC elements of the subspace) is supplied one cycle later, aligned with
// the RAM data. Distances accumulate over the chunks in the difference
// calculators and the comparator keeps the minimum over the prototype groups.
// Timing: idx_valid/idx appear 3 cycles after the issue cycle flagged
// last_c && last_p (RAM read, accumulate, compare).
// All difference calculators share one control, so only dvalid[0] is used,
// and the comparator's minimum distance is not needed outside the lane; lint
// reports both as unused.
// Lane contents follow the paper's Fig. 3 detail; the pipelining is this design's.
module pqa_dist_lane
  import pqa_pkg::*;
#(
  parameter int unsigned LS_VEC = 4,
  parameter int unsigned NP_VEC = 16,
  parameter int unsigned NP_MAX = 32,
  parameter int unsigned LS_MAX = 4,
  parameter int unsigned DBITS  = 16,
  parameter int unsigned DEPTH  = 4,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KW     = (NP_VEC > 1) ? $clog2(NP_VEC) : 1,
  localparam int unsigned IDX_W  = $clog2(NP_MAX),
  localparam int unsigned DIST_W = 2*DBITS + $clog2(LS_MAX + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  dist_mode_e                   mode,
  input  logic [7:0]                   np,
  // prototype load
  input  logic                         pr_we,
  input  logic [KW-1:0]                pr_wsel,
  input  logic [AW-1:0]                pr_waddr,
  input  logic [LS_VEC-1:0][DBITS-1:0] pr_wdata,
  // issue (cycle t)
  input  logic                         issue,
  input  logic                         first_c,
  input  logic                         last_c,
  input  logic                         first_p,
  input  logic                         last_p,
  input  logic [7:0]                   pgrp,
  input  logic [AW-1:0]                raddr,
  // input chunk (cycle t+1)
  input  logic [LS_VEC-1:0]            elem_en,
  input  logic [LS_VEC-1:0][DBITS-1:0] x,
  // result
  output logic                         idx_valid,
  output logic [IDX_W-1:0]             idx
);
  localparam int unsigned DW = DIST_W;
  logic [NP_VEC-1:0][LS_VEC-1:0][DBITS-1:0] proto;
  logic [NP_VEC-1:0][DW-1:0]  dists;
  logic [NP_VEC-1:0]          dvalid;
  logic       v1, fc1, lc1, fp1, lp1;
  logic [7:0] pg1;
  logic       fp2, lp2;
  logic [7:0] pg2;
  logic [DW-1:0] min_dist;

  pqa_proto_ram #(.NP_VEC(NP_VEC), .LS_VEC(LS_VEC), .DBITS(DBITS), .DEPTH(DEPTH)) u_ram (
    .clk, .we(pr_we), .wsel(pr_wsel), .waddr(pr_waddr), .wdata(pr_wdata),
    .raddr, .rdata(proto));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, fc1, lc1, fp1, lp1, fp2, lp2} <= '0;
      pg1 <= '0;
      pg2 <= '0;
    end else begin
      v1 <= issue; fc1 <= first_c; lc1 <= last_c; fp1 <= first_p; lp1 <= last_p; pg1 <= pgrp;
      if (v1 && lc1) begin fp2 <= fp1; lp2 <= lp1; pg2 <= pg1; end
    end
  end

  for (genvar k = 0; k < NP_VEC; k++) begin : g_dc
    pqa_diff_calc #(.LS_VEC(LS_VEC), .DBITS(DBITS), .LS_MAX(LS_MAX)) u_dc (
      .clk, .rst_n, .mode, .in_valid(v1), .first(fc1), .last(lc1),
      .elem_en, .x, .b(proto[k]), .dist_valid(dvalid[k]), .dists(dists[k]));
  end

  pqa_comparator #(.NP_VEC(NP_VEC), .NP_MAX(NP_MAX), .DIST_W(DW)) u_cmp (
    .clk, .rst_n, .in_valid(dvalid[0]), .first(fp2), .last(lp2), .pgrp(pg2), .np,
    .dists, .idx_valid, .idx, .min_dist);
endmodule
