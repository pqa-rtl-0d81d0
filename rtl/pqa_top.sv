// pqa_top: the product-quantization accelerator engine (PQA).
//
// A PQ layer replaces a matrix product Y = W X by: for every input column and
// every subspace (a slice of Ls consecutive rows) find the closest of Np
// prototypes, then add up precomputed dot products LUT_PQ[subspace][cout][idx]
// over the subspaces. The engine does this with
//   * an input path: a mux choosing between data from external memory and the
//     engine's own outputs, a per-subspace quantizer, and a two-bank input buffer;
//   * NS_VEC distance-calculator lanes, each comparing LS_VEC input elements
//     with NP_VEC prototypes per cycle;
//   * NOUT_VEC product-lookup slots, each with NS_VEC LUT_PQ partitions,
//     dequantizers and a 16-bit accumulator;
//   * a sequencer. For each column it walks the ceil(Ns/NS_VEC) subspace groups.
//     Distance calculation of a group takes ceil(Np/NP_VEC)*ceil(Ls/LS_VEC)
//     cycles and product lookup ceil(Cout/NOUT_VEC) cycles. The two overlap
//     through a 4-entry index FIFO, so a group costs the larger of the two, as
//     in the paper's cycle model (Eq. 1), plus a pipeline fill of a few cycles.
// Finished outputs leave on out_* and are also quantized and written into the
// other input-buffer bank as the next layer's input.
//
// Usage: load quantizer parameters (q_wr_*) and the input (in_wr_*, accepted
// only while in_wr_ready, i.e. idle). Prototypes (pr_wr_*), LUT_PQ (lut_wr_*,
// NS_VEC x NOUT_VEC entries per cycle) and dequantizer parameters (dq_wr_*)
// go into one of two table banks and may be loaded at any time into the bank
// the running layer does not use, so loading the next layer overlaps compute
// (the paper's Eq. 2). Then pulse start with cfg. busy stays high until the
// last output; done pulses for one cycle.
// All product-lookup slots run in lock step, so only slot 0's valid is used
// (an assertion checks the others agree); lint reports the rest as unused.
// rst_n resets flops asynchronously and also disables the assertions below,
// which lint reports as a mixed synchronous/asynchronous use.
// The block structure, the vectorisation and maximum parameters and their
// default values (the paper's MicroNet configuration, 16-bit baseline) follow
// the paper. The sequencing, the FIFO, the two input-buffer banks, the two
// table banks used to overlap loading with compute, the load ports and the
// fixed-point quantization formats are this design's choices.
module pqa_top
  import pqa_pkg::*;
#(
  parameter int unsigned LS_VEC   = 4,
  parameter int unsigned NP_VEC   = 16,
  parameter int unsigned NS_VEC   = 16,
  parameter int unsigned NOUT_VEC = 16,
  parameter int unsigned LS_MAX   = 4,
  parameter int unsigned NS_MAX   = 32,
  parameter int unsigned NP_MAX   = 32,
  parameter int unsigned NOUT_MAX = 256,
  parameter int unsigned NIN_MAX  = 128,
  parameter int unsigned COLS_MAX = 128,
  parameter int unsigned DBITS    = 16,
  parameter int unsigned LBITS    = 16,
  parameter int unsigned ACC_W    = 16,
  localparam int unsigned GG_MAX = (NS_MAX + NS_VEC - 1) / NS_VEC,
  localparam int unsigned PG_MAX = (NP_MAX + NP_VEC - 1) / NP_VEC,
  localparam int unsigned CH_MAX = (LS_MAX + LS_VEC - 1) / LS_VEC,
  localparam int unsigned OG_MAX = (NOUT_MAX + NOUT_VEC - 1) / NOUT_VEC,
  localparam int unsigned CW     = (COLS_MAX > 1) ? $clog2(COLS_MAX) : 1,
  localparam int unsigned RW     = $clog2(NIN_MAX + 1),
  localparam int unsigned IDX_W  = $clog2(NP_MAX)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // layer control
  input  layer_cfg_t                           cfg,
  input  logic                                 start,
  output logic                                 busy,
  output logic                                 done,
  // input from external memory (through mux and quantizer into the input buffer)
  input  logic                                 in_wr_valid,
  output logic                                 in_wr_ready,
  input  logic                                 in_wr_bank,
  input  logic [CW-1:0]                        in_wr_col,
  input  logic [RW-1:0]                        in_wr_row,
  input  logic [NOUT_VEC-1:0]                  in_wr_mask,
  input  logic [NOUT_VEC-1:0][15:0]            in_wr_data,
  // quantizer parameters per bank and subspace, and the Ls of that bank's layer
  input  logic                                 q_wr_valid,
  input  logic                                 q_wr_bank,
  input  logic [7:0]                           q_wr_sub,
  input  logic [7:0]                           q_wr_ls,
  input  logic [15:0]                          q_wr_mult,
  input  logic [DBITS-1:0]                     q_wr_zp,
  // LUT_PQ dequantizer parameters per subspace
  input  logic                                 dq_wr_valid,
  input  logic                                 dq_wr_bank,
  input  logic [7:0]                           dq_wr_sub,
  input  logic [15:0]                          dq_wr_scale,
  input  logic [LBITS-1:0]                     dq_wr_zp,
  // prototypes: LS_VEC elements of prototype pr_wr_proto of subspace pr_wr_sub
  input  logic                                 pr_wr_valid,
  input  logic                                 pr_wr_bank,
  input  logic [7:0]                           pr_wr_sub,
  input  logic [7:0]                           pr_wr_proto,
  input  logic [7:0]                           pr_wr_chunk,
  input  logic [LS_VEC-1:0][DBITS-1:0]         pr_wr_data,
  // LUT_PQ: subspace group, output group, prototype; one entry per partition
  input  logic                                 lut_wr_valid,
  input  logic                                 lut_wr_bank,
  input  logic [7:0]                           lut_wr_grp,
  input  logic [7:0]                           lut_wr_og,
  input  logic [7:0]                           lut_wr_proto,
  input  logic [NOUT_VEC-1:0][NS_VEC-1:0][LBITS-1:0] lut_wr_data,
  // layer outputs (16-bit, before quantization) towards external memory
  output logic                                 out_valid,
  output logic [CW-1:0]                        out_col,
  output logic [9:0]                           out_chan,   // first channel
  output logic [NOUT_VEC-1:0]                  out_mask,
  output logic [NOUT_VEC-1:0][ACC_W-1:0]       out_data,
  // activity of the pipeline mechanisms (one-cycle pulses)
  output logic                                 ev_overlap,  // distance and lookup both busy
  output logic                                 ev_stall,    // distance stage waits for FIFO space
  output logic                                 ev_sat       // an accumulator saturated
);
  // prototypes and LUT_PQ are held twice: one bank is read by the running layer
  // while the host loads the next layer's tables into the other
  localparam int unsigned PDEPTH = 2 * GG_MAX * PG_MAX * CH_MAX;
  localparam int unsigned LDEPTH = 2 * GG_MAX * OG_MAX * NP_MAX;
  localparam int unsigned PAW = (PDEPTH > 1) ? $clog2(PDEPTH) : 1;
  localparam int unsigned LAW = (LDEPTH > 1) ? $clog2(LDEPTH) : 1;
  localparam int unsigned KW  = (NP_VEC > 1) ? $clog2(NP_VEC) : 1;
  localparam int unsigned OW  = (OG_MAX > 1) ? $clog2(OG_MAX) : 1;
  localparam int unsigned GW  = (GG_MAX > 1) ? $clog2(GG_MAX) : 1;
  // index FIFO depth: covers the 3-cycle lane latency even for one-cycle groups
  localparam int unsigned SW  = (NS_MAX > 1) ? $clog2(NS_MAX) : 1;
  localparam int unsigned FIFO_D = 4;
  localparam int unsigned FPW = $clog2(FIFO_D);

  // ---------------------------------------------------------------- config
  layer_cfg_t cfg_r;
  logic [7:0] n_gg, n_pg, n_ch, n_og;

  // ---------------------------------------------------------------- parameters
  logic [15:0]      q_mult [2][NS_MAX];
  logic [DBITS-1:0] q_zp   [2][NS_MAX];
  logic [7:0]       q_ls   [2];
  logic [15:0]      dq_scale [2][NS_MAX];
  logic [LBITS-1:0] dq_zp    [2][NS_MAX];

  always_ff @(posedge clk) begin
    if (q_wr_valid && int'(q_wr_sub) < NS_MAX) begin
      q_mult[q_wr_bank][SW'(q_wr_sub)] <= q_wr_mult;
      q_zp[q_wr_bank][SW'(q_wr_sub)]   <= q_wr_zp;
      q_ls[q_wr_bank]             <= q_wr_ls;
    end
    if (dq_wr_valid && int'(dq_wr_sub) < NS_MAX) begin
      dq_scale[dq_wr_bank][SW'(dq_wr_sub)] <= dq_wr_scale;
      dq_zp[dq_wr_bank][SW'(dq_wr_sub)]    <= dq_wr_zp;
    end
  end

  // ---------------------------------------------------------------- input path
  logic                          wb_valid, wb_bank;
  logic [CW-1:0]                 wb_col;
  logic [RW-1:0]                 wb_row;
  logic [NOUT_VEC-1:0]           wb_mask;
  logic [NOUT_VEC-1:0][15:0]     wb_x;
  logic [NOUT_VEC-1:0][DBITS-1:0] wb_q;
  logic [NIN_MAX-1:0][DBITS-1:0] col_data;
  logic [CW-1:0]                 d_col;

  assign in_wr_ready = !busy;

  // the mux of the block diagram: own outputs while a layer runs, else external data
  always_comb begin
    if (busy) begin
      wb_valid = out_valid;
      wb_bank  = ~cfg_r.in_bank;
      wb_col   = out_col;
      wb_row   = RW'(out_chan);
      wb_mask  = out_mask;
      wb_x     = out_data;
    end else begin
      wb_valid = in_wr_valid;
      wb_bank  = in_wr_bank;
      wb_col   = in_wr_col;
      wb_row   = in_wr_row;
      wb_mask  = in_wr_mask;
      wb_x     = in_wr_data;
    end
  end

  for (genvar i = 0; i < NOUT_VEC; i++) begin : g_quant
    int unsigned sub;
    always_comb begin
      sub = (q_ls[wb_bank] == 0) ? 0 : (int'(wb_row) + i) / int'(q_ls[wb_bank]);
      if (sub >= NS_MAX) sub = NS_MAX - 1;
    end
    pqa_quantize #(.DBITS(DBITS), .IN_W(16)) u_q (
      .x(wb_x[i]), .mult(q_mult[wb_bank][sub]), .zero_point(q_zp[wb_bank][sub]), .q(wb_q[i]));
  end

  pqa_input_buffer #(.NIN_MAX(NIN_MAX), .COLS_MAX(COLS_MAX), .DBITS(DBITS), .WR_N(NOUT_VEC)) u_ibuf (
    .clk, .we(wb_valid), .wbank(wb_bank), .wcol(wb_col), .wrow(wb_row), .wmask(wb_mask),
    .wdata(wb_q), .rbank(cfg_r.in_bank), .rcol(d_col), .rdata(col_data));

  // ---------------------------------------------------------------- distance stage
  logic       d_active, d_issue, d_group_start;
  logic [7:0] d_g, d_pg, d_ch;
  logic [FPW:0] tokens;
  logic       fifo_pop;
  logic [7:0] g_d1, ch_d1;

  assign d_group_start = d_active && d_pg == 0 && d_ch == 0;
  assign d_issue       = d_active && !(d_group_start && int'(tokens) == FIFO_D);
  assign ev_stall      = d_active && !d_issue;

  logic d_first_c, d_last_c, d_first_p, d_last_p;
  assign d_first_c = d_ch == 0;
  assign d_last_c  = d_ch == n_ch - 1;
  assign d_first_p = d_pg == 0;
  assign d_last_p  = d_pg == n_pg - 1;

  logic [PAW-1:0] d_paddr;
  assign d_paddr = PAW'(((int'(cfg_r.wt_bank) * GG_MAX + int'(d_g)) * PG_MAX + int'(d_pg)) * CH_MAX
                        + int'(d_ch));

  // group tags travel alongside the lane pipeline (3 cycles)
  logic [2:0][7:0]  tg;
  logic [2:0][CW-1:0] tc;

  // input chunks for each lane, one cycle after issue
  logic [NS_VEC-1:0][LS_VEC-1:0][DBITS-1:0] lane_x;
  logic [NS_VEC-1:0][LS_VEC-1:0]            lane_en;
  always_comb begin
    for (int l = 0; l < NS_VEC; l++)
      for (int e = 0; e < LS_VEC; e++) begin
        int unsigned pos, row;
        pos = int'(ch_d1) * LS_VEC + e;
        row = (int'(g_d1) * NS_VEC + l) * int'(cfg_r.ls) + pos;
        lane_en[l][e] = pos < int'(cfg_r.ls) && row < NIN_MAX;
        lane_x[l][e]  = lane_en[l][e] ? col_data[row] : '0;
      end
  end

  logic [NS_VEC-1:0]            idx_valid;
  logic [NS_VEC-1:0][IDX_W-1:0] idx;

  for (genvar l = 0; l < NS_VEC; l++) begin : g_lane
    logic pr_we;
    assign pr_we = pr_wr_valid && (int'(pr_wr_sub) % NS_VEC) == l && int'(pr_wr_sub) < NS_MAX;
    pqa_dist_lane #(.LS_VEC(LS_VEC), .NP_VEC(NP_VEC), .NP_MAX(NP_MAX), .LS_MAX(LS_MAX),
                    .DBITS(DBITS), .DEPTH(PDEPTH)) u_lane (
      .clk, .rst_n, .mode(cfg_r.mode), .np(cfg_r.np),
      .pr_we, .pr_wsel(KW'(int'(pr_wr_proto) % NP_VEC)),
      .pr_waddr(PAW'(((int'(pr_wr_bank) * GG_MAX + int'(pr_wr_sub) / NS_VEC) * PG_MAX
                      + int'(pr_wr_proto) / NP_VEC) * CH_MAX + int'(pr_wr_chunk))),
      .pr_wdata(pr_wr_data),
      .issue(d_issue), .first_c(d_first_c), .last_c(d_last_c), .first_p(d_first_p),
      .last_p(d_last_p), .pgrp(d_pg), .raddr(d_paddr),
      .elem_en(lane_en[l]), .x(lane_x[l]), .idx_valid(idx_valid[l]), .idx(idx[l]));
  end

  // ---------------------------------------------------------------- index FIFO
  typedef struct packed {
    logic [NS_VEC-1:0][IDX_W-1:0] idx;
    logic [7:0]                   g;
    logic [CW-1:0]                col;
  } grp_t;
  grp_t       fifo [FIFO_D];
  logic [FPW-1:0] f_wp, f_rp;
  logic [FPW:0]   f_cnt;
  logic       fifo_push;
  assign fifo_push = idx_valid[0];

  // ---------------------------------------------------------------- lookup stage
  logic                         l_active;
  logic [7:0]                   l_og, l_g;
  logic [CW-1:0]                l_col;
  logic [NS_VEC-1:0][IDX_W-1:0] l_idx;
  logic [NS_VEC-1:0]            l_lane_en;
  logic [7:0]                   lg_d1;
  logic [1:0][7:0]              o_og;
  logic [1:0][CW-1:0]           o_col;
  logic [NS_VEC-1:0][15:0]      lane_dq_scale;
  logic [NS_VEC-1:0][LBITS-1:0] lane_dq_zp;
  logic [NOUT_VEC-1:0]          pl_valid, pl_sat;

  assign fifo_pop   = f_cnt != 0 && (!l_active || l_og == n_og - 1);
  assign ev_overlap = d_issue && l_active;

  always_comb begin
    for (int l = 0; l < NS_VEC; l++) begin
      l_lane_en[l] = (int'(l_g) * NS_VEC + l) < int'(cfg_r.ns);
      if ((int'(lg_d1) * NS_VEC + l) < NS_MAX) begin
        lane_dq_scale[l] = dq_scale[cfg_r.wt_bank][int'(lg_d1) * NS_VEC + l];
        lane_dq_zp[l]    = dq_zp[cfg_r.wt_bank][int'(lg_d1) * NS_VEC + l];
      end else begin
        lane_dq_scale[l] = '0;
        lane_dq_zp[l]    = '0;
      end
    end
  end

  for (genvar o = 0; o < NOUT_VEC; o++) begin : g_pl
    pqa_product_lookup #(.NS_VEC(NS_VEC), .NP_MAX(NP_MAX), .GG_MAX(GG_MAX), .OG_MAX(OG_MAX),
                         .LBITS(LBITS), .ACC_W(ACC_W)) u_pl (
      .clk, .rst_n,
      .lut_we(lut_wr_valid && int'(lut_wr_grp) < GG_MAX && int'(lut_wr_og) < OG_MAX
                   && int'(lut_wr_proto) < NP_MAX),
      .lut_waddr(LAW'(((int'(lut_wr_bank) * GG_MAX + int'(lut_wr_grp)) * OG_MAX + int'(lut_wr_og)) * NP_MAX
                      + int'(lut_wr_proto))),
      .lut_wdata(lut_wr_data[o]),
      .issue(l_active), .bank(cfg_r.wt_bank), .first_g(l_g == 0), .last_g(l_g == n_gg - 1), .g(GW'(l_g)), .og(OW'(l_og)),
      .lane_en(l_lane_en), .idx(l_idx), .dq_scale(lane_dq_scale), .dq_zp(lane_dq_zp),
      .out_valid(pl_valid[o]), .out(out_data[o]), .sat(pl_sat[o]));
  end

  assign out_valid = pl_valid[0];
  assign out_col   = o_col[1];
  assign out_chan  = 10'(int'(o_og[1]) * NOUT_VEC);
  assign ev_sat    = |pl_sat;
  always_comb
    for (int o = 0; o < NOUT_VEC; o++)
      out_mask[o] = (int'(o_og[1]) * NOUT_VEC + o) < int'(cfg_r.cout);

  // ---------------------------------------------------------------- sequencer
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_r <= '0;
      {n_gg, n_pg, n_ch, n_og} <= '0;
      busy <= 1'b0; done <= 1'b0;
      d_active <= 1'b0; d_col <= '0; d_g <= '0; d_pg <= '0; d_ch <= '0;
      tokens <= '0; g_d1 <= '0; ch_d1 <= '0;
      tg <= '0; tc <= '0;
      f_wp <= '0; f_rp <= '0; f_cnt <= '0;
      l_active <= 1'b0; l_og <= '0; l_g <= '0; l_col <= '0; l_idx <= '0; lg_d1 <= '0;
      o_og <= '0; o_col <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        cfg_r    <= cfg;
        n_gg     <= 8'(ceil_div(int'(cfg.ns), NS_VEC));
        n_pg     <= 8'(ceil_div(int'(cfg.np), NP_VEC));
        n_ch     <= 8'(ceil_div(int'(cfg.ls), LS_VEC));
        n_og     <= 8'(ceil_div(int'(cfg.cout), NOUT_VEC));
        busy     <= 1'b1;
        d_active <= 1'b1;
        d_col <= '0; d_g <= '0; d_pg <= '0; d_ch <= '0; tokens <= '0;
      end

      // distance stage counters: chunk, prototype group, subspace group, column
      if (d_issue) begin
        if (d_ch != n_ch - 1) d_ch <= d_ch + 1;
        else begin
          d_ch <= '0;
          if (d_pg != n_pg - 1) d_pg <= d_pg + 1;
          else begin
            d_pg <= '0;
            if (d_g != n_gg - 1) d_g <= d_g + 1;
            else begin
              d_g <= '0;
              if (int'(d_col) != int'(cfg_r.ncols) - 1) d_col <= d_col + 1;
              else d_active <= 1'b0;
            end
          end
        end
      end
      tokens <= tokens + (FPW+1)'(d_issue && d_group_start) - (FPW+1)'(fifo_pop);
      g_d1  <= d_g;
      ch_d1 <= d_ch;
      tg <= {tg[1:0], d_g};
      tc <= {tc[1:0], d_col};

      // index FIFO
      if (fifo_push) begin
        fifo[f_wp] <= '{idx: idx, g: tg[2], col: tc[2]};
        f_wp <= f_wp + 1'b1;
      end
      if (fifo_pop) f_rp <= f_rp + 1'b1;
      f_cnt <= f_cnt + (FPW+1)'(fifo_push) - (FPW+1)'(fifo_pop);

      // lookup stage
      if (fifo_pop) begin
        l_active <= 1'b1;
        l_og     <= '0;
        l_g      <= fifo[f_rp].g;
        l_col    <= fifo[f_rp].col;
        l_idx    <= fifo[f_rp].idx;
      end else if (l_active) begin
        if (l_og == n_og - 1) l_active <= 1'b0;
        else l_og <= l_og + 1;
      end
      lg_d1 <= l_g;
      o_og  <= {o_og[0], l_og};
      o_col <= {o_col[0], l_col};

      if (busy && out_valid && int'(out_col) == int'(cfg_r.ncols) - 1
          && o_og[1] == n_og - 1) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // the FIFO never overflows: the distance stage only starts a group with a free slot
  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    fifo_push |-> (int'(f_cnt) < FIFO_D || fifo_pop));
  a_fifo_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
    fifo_pop |-> f_cnt != 0);
  // tables of the running layer must not change under it
  a_no_write_to_live_tables: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !((lut_wr_valid && lut_wr_bank == cfg_r.wt_bank) ||
               (pr_wr_valid && pr_wr_bank == cfg_r.wt_bank) ||
               (dq_wr_valid && dq_wr_bank == cfg_r.wt_bank)));
  a_lanes_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    idx_valid[0] |-> &idx_valid);
  a_slots_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    pl_valid[0] |-> &pl_valid);
endmodule
