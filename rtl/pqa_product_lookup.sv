// pqa_product_lookup: one output slot of the product-lookup stage. It owns the
// NS_VEC LUT_PQ partitions of its slot (one per lane), one dequantizer per
// partition and the accumulator. Each issue cycle every lane l looks up the
// precomputed dot product of its closest prototype idx[l] for output group og
// of subspace group g in table bank `bank` (NBANK banks let the next layer's
// table be loaded while this one is read); one cycle later the codes are dequantized to 16 bits
// with the per-subspace parameters dq_scale/dq_zp (supplied in that cycle) and
// summed into the accumulator. out_valid/out follow 2 cycles after an issue
// flagged last_g. The NOUT_VEC copies of this block together perform
// NS_VEC x NOUT_VEC lookups per cycle, as in the paper.
module pqa_product_lookup #(
  parameter int unsigned NS_VEC  = 16,
  parameter int unsigned NP_MAX  = 32,
  parameter int unsigned GG_MAX  = 2,
  parameter int unsigned OG_MAX  = 16,
  parameter int unsigned LBITS   = 16,
  parameter int unsigned ACC_W   = 16,
  parameter int unsigned DQ_FRAC = 8,
  parameter int unsigned NBANK   = 2,
  localparam int unsigned DEPTH = NBANK * GG_MAX * OG_MAX * NP_MAX,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned OW    = (OG_MAX > 1) ? $clog2(OG_MAX) : 1,
  localparam int unsigned GW    = (GG_MAX > 1) ? $clog2(GG_MAX) : 1,
  localparam int unsigned IDX_W = $clog2(NP_MAX)
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // LUT_PQ load: one entry per lane per cycle
  input  logic                             lut_we,
  input  logic [AW-1:0]                    lut_waddr,
  input  logic [NS_VEC-1:0][LBITS-1:0]     lut_wdata,
  // lookup issue (cycle t)
  input  logic                             issue,
  input  logic                             bank,     // table bank of the running layer
  input  logic                             first_g,
  input  logic                             last_g,
  input  logic [GW-1:0]                    g,
  input  logic [OW-1:0]                    og,
  input  logic [NS_VEC-1:0]                lane_en,
  input  logic [NS_VEC-1:0][IDX_W-1:0]     idx,
  // dequantization parameters of the lanes' subspaces (cycle t+1)
  input  logic [NS_VEC-1:0][15:0]          dq_scale,
  input  logic [NS_VEC-1:0][LBITS-1:0]     dq_zp,
  // result
  output logic                             out_valid,
  output logic signed [ACC_W-1:0]          out,
  output logic                             sat
);
  logic [NS_VEC-1:0][LBITS-1:0] code;
  logic [NS_VEC-1:0][ACC_W-1:0] deq;
  logic             v1, f1, l1;
  logic [OW-1:0]    og1;
  logic [NS_VEC-1:0] en1;

  for (genvar l = 0; l < NS_VEC; l++) begin : g_lane
    pqa_lut_mem #(.LBITS(LBITS), .DEPTH(DEPTH)) u_lut (
      .clk, .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata[l]),
      .raddr(AW'(((32'(bank) * GG_MAX + 32'(g)) * OG_MAX + 32'(og)) * NP_MAX + 32'(idx[l]))),
      .rdata(code[l]));
    pqa_dequantize #(.LBITS(LBITS), .OUT_W(ACC_W), .DQ_FRAC(DQ_FRAC)) u_dq (
      .q(code[l]), .scale(dq_scale[l]), .zero_point(dq_zp[l]), .y(deq[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {v1, f1, l1} <= '0;
      og1 <= '0;
      en1 <= '0;
    end else begin
      v1 <= issue; f1 <= first_g; l1 <= last_g; og1 <= og; en1 <= lane_en;
    end
  end

  pqa_accumulator #(.NS_VEC(NS_VEC), .ACC_W(ACC_W), .OG_MAX(OG_MAX)) u_acc (
    .clk, .rst_n, .in_valid(v1), .first(f1), .last(l1), .og(og1), .lane_en(en1),
    .vals(deq), .out_valid, .out, .sat);
endmodule
