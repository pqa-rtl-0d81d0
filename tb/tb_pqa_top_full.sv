// tb_pqa_top_full: one complete two-layer run of the PQA engine at its default
// sizes: MicroNet-KWS pointwise layers 1 and 2 with Ls = 4 and Np = 16, the
// second layer reading the first layer's outputs from the input buffer.
// Same checking as tb_pqa_top (every output word against a software model and
// the layer cycle count against the cycle model), saturation not required.
module tb_pqa_top_full;
  import pqa_pkg::*;
  import pqa_ref_pkg::*;

  // the engine's default sizes (MicroNet configuration, 16-bit)
  localparam int LSV = 4, NPV = 16, NSV = 16, NOV = 16;
  localparam int LSM = 4, NSM = 32, NPM = 32, NOM = 256, NIM = 128, COLM = 128;
  localparam int DB = 16, LB = 16;
  localparam int NLAYERS = 2;
  // MicroNet-KWS PointW-1 (84 -> 120 channels) then PointW-2 (120 -> 84), 5x25 = 125 columns,
  // with Ls = 4, Np = 16 as in the paper's MicroNet PQA.
  // ls, np, ns, cout, ncols, mode, in_bank, input scale mult, LUT dequant scale
  localparam int LCFG [NLAYERS][9] = '{
    '{4, 16, 21, 120, 125, 1, 0, 256, 40},
    '{4, 16, 30,  84, 125, 1, 1, 64, 40}
  };
  localparam int WATCHDOG = 400000;
  localparam bit CHECK_EVENTS = 0;

  localparam int GGM = (NSM + NSV - 1) / NSV, OGM = (NOM + NOV - 1) / NOV;
  localparam int CW = (COLM > 1) ? $clog2(COLM) : 1, RW = $clog2(NIM + 1);

  int checks = 0, failures = 0;
  int n_bg_load = 0, n_overlap = 0, n_stall = 0, n_sat = 0, n_l1 = 0, n_l2 = 0, n_ddr = 0, n_feedback = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  layer_cfg_t cfg;
  logic start, busy, done;
  logic in_wr_valid, in_wr_ready, in_wr_bank;
  logic [CW-1:0] in_wr_col;
  logic [RW-1:0] in_wr_row;
  logic [NOV-1:0] in_wr_mask;
  logic [NOV-1:0][15:0] in_wr_data;
  logic q_wr_valid, q_wr_bank;
  logic [7:0] q_wr_sub, q_wr_ls;
  logic [15:0] q_wr_mult;
  logic [DB-1:0] q_wr_zp;
  logic dq_wr_valid, dq_wr_bank, pr_wr_bank, lut_wr_bank;
  logic [7:0] dq_wr_sub;
  logic [15:0] dq_wr_scale;
  logic [LB-1:0] dq_wr_zp;
  logic pr_wr_valid;
  logic [7:0] pr_wr_sub, pr_wr_proto, pr_wr_chunk;
  logic [LSV-1:0][DB-1:0] pr_wr_data;
  logic lut_wr_valid;
  logic [7:0] lut_wr_grp, lut_wr_og, lut_wr_proto;
  logic [NOV-1:0][NSV-1:0][LB-1:0] lut_wr_data;
  logic out_valid;
  logic [CW-1:0] out_col;
  logic [9:0] out_chan;
  logic [NOV-1:0] out_mask;
  logic [NOV-1:0][15:0] out_data;
  logic ev_overlap, ev_stall, ev_sat;


  pqa_top dut (.*);


  // ------------------------------------------------------------ model state
  longint qbuf [2][COLM][NIM];          // quantized input-buffer contents
  longint q_mult [2][NSM], q_zp [2][NSM];
  int     q_ls [2];
  longint proto [2][NSM][NPM][LSM];   // per table bank
  longint lut [2][NSM][NOM][NPM];
  longint dqs [2][NSM], dqz [2][NSM];
  longint yref [COLM][NOM];
  int     outs_seen;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (ev_overlap) n_overlap++;
    if (ev_stall)   n_stall++;
    if (ev_sat)     n_sat++;
    if (busy && (lut_wr_valid || pr_wr_valid)) n_bg_load++;
  end

  task automatic set_q(input int bank, input int ls, input longint mult, input longint zp);
    q_ls[bank] = ls;
    for (int s = 0; s < NSM; s++) begin
      @(negedge clk);
      q_wr_valid = 1; q_wr_bank = bank[0]; q_wr_sub = 8'(s); q_wr_ls = 8'(ls);
      q_mult[bank][s] = mult + 8 * (s % 3);          // per-subspace scales differ
      q_zp[bank][s]   = zp + (s % 2);
      q_wr_mult = 16'(q_mult[bank][s]); q_wr_zp = DB'(q_zp[bank][s]);
    end
    @(negedge clk);
    q_wr_valid = 0;
  endtask

  function automatic int subspace_of(int bank, int row);
    int s;
    s = row / q_ls[bank];
    return (s >= NSM) ? NSM - 1 : s;
  endfunction

  task automatic load_input(input int bank, input int ncols, input int rows);
    for (int c = 0; c < ncols; c++)
      for (int r0 = 0; r0 < rows; r0 += NOV) begin
        @(negedge clk);
        in_wr_valid = 1; in_wr_bank = bank[0]; in_wr_col = CW'(c); in_wr_row = RW'(r0);
        for (int i = 0; i < NOV; i++) begin
          int r, s;
          r = r0 + i;
          in_wr_mask[i] = r < rows;
          in_wr_data[i] = 16'($urandom_range(0, 4000) - 2000);
          if (r < rows && r < NIM) begin
            s = subspace_of(bank, r);
            qbuf[bank][c][r] = quant($signed(in_wr_data[i]), q_mult[bank][s], q_zp[bank][s], DB);
          end
        end
        if (!in_wr_ready) begin failures++; $display("input port not ready while idle"); end
        n_ddr++;
      end
    @(negedge clk);
    in_wr_valid = 0;
  endtask

  task automatic load_layer(input int li);
    int ls, np, ns, cout, nch, wb;
    wb = li % 2;
    ls = LCFG[li][0]; np = LCFG[li][1]; ns = LCFG[li][2]; cout = LCFG[li][3];
    nch = (ls + LSV - 1) / LSV;
    for (int s = 0; s < ns; s++)
      for (int p = 0; p < np; p++) begin
        for (int e = 0; e < LSM; e++) proto[wb][s][p][e] = longint'($urandom_range(0, (1 << DB) - 1));
        for (int c = 0; c < nch; c++) begin
          @(negedge clk);
          pr_wr_valid = 1; pr_wr_bank = wb[0]; pr_wr_sub = 8'(s); pr_wr_proto = 8'(p); pr_wr_chunk = 8'(c);
          for (int e = 0; e < LSV; e++) pr_wr_data[e] = (c * LSV + e < LSM) ? DB'(proto[wb][s][p][c * LSV + e]) : '0;
        end
      end
    for (int s = 0; s < NSM; s++)
      for (int co = 0; co < NOM; co++)
        for (int p = 0; p < NPM; p++) lut[wb][s][co][p] = longint'($urandom_range(0, (1 << LB) - 1));
    for (int gg = 0; gg < (ns + NSV - 1) / NSV; gg++)
      for (int og = 0; og < (cout + NOV - 1) / NOV; og++)
        for (int p = 0; p < np; p++) begin
          @(negedge clk);
          pr_wr_valid = 0;
          lut_wr_valid = 1; lut_wr_bank = wb[0]; lut_wr_grp = 8'(gg); lut_wr_og = 8'(og); lut_wr_proto = 8'(p);
          for (int o = 0; o < NOV; o++)
            for (int l = 0; l < NSV; l++) begin
              int s, co;
              s = gg * NSV + l; co = og * NOV + o;
              lut_wr_data[o][l] = (s < NSM && co < NOM) ? LB'(lut[wb][s][co][p]) : '0;
            end
        end
    for (int s = 0; s < NSM; s++) begin
      @(negedge clk);
      pr_wr_valid = 0; lut_wr_valid = 0;
      dq_wr_valid = 1; dq_wr_bank = wb[0]; dq_wr_sub = 8'(s);
      dqs[wb][s] = LCFG[li][8] + 7 * s;
      // a large scale comes with a zero offset so that the sums run into saturation
      dqz[wb][s] = (LCFG[li][8] > 30000) ? 0 : (1 << (LB - 1)) - 3 + (s % 4);
      dq_wr_scale = 16'(dqs[wb][s]); dq_wr_zp = LB'(dqz[wb][s]);
    end
    @(negedge clk);
    pr_wr_valid = 0; lut_wr_valid = 0; dq_wr_valid = 0;
  endtask

  // reference for one layer; also updates the other bank with the quantized outputs
  task automatic model_layer(input int li);
    int ls, np, ns, cout, ncols, bank, ngg, wb;
    wb = li % 2;
    ls = LCFG[li][0]; np = LCFG[li][1]; ns = LCFG[li][2]; cout = LCFG[li][3];
    ncols = LCFG[li][4]; bank = LCFG[li][6];
    ngg = (ns + NSV - 1) / NSV;
    for (int c = 0; c < ncols; c++) begin
      int idx [NSM];
      for (int s = 0; s < ns; s++) begin
        longint bestd;
        idx[s] = -1; bestd = 0;
        for (int p = 0; p < np; p++) begin
          longint d;
          d = 0;
          for (int e = 0; e < ls; e++) begin
            longint df;
            df = qbuf[bank][c][s * ls + e] - proto[wb][s][p][e];
            d += LCFG[li][5] ? df * df : (df < 0 ? -df : df);
          end
          if (idx[s] < 0 || d < bestd) begin idx[s] = p; bestd = d; end
        end
      end
      for (int co = 0; co < cout; co++) begin
        longint acc;
        acc = 0;
        for (int gg = 0; gg < ngg; gg++) begin
          longint sum;
          sum = acc;
          for (int l = 0; l < NSV; l++) begin
            int s;
            s = gg * NSV + l;
            if (s < ns) sum += dequant(lut[wb][s][co][idx[s]], dqs[wb][s], dqz[wb][s], 16);
          end
          acc = pqa_ref_pkg::sat(sum);
        end
        yref[c][co] = acc;
      end
    end
  endtask

  task automatic run_layer(input int li);
    int ls, np, ns, cout, ncols, bank, ngg, nog, dcy, lcy, cycles, bound, expected_outs;
    ls = LCFG[li][0]; np = LCFG[li][1]; ns = LCFG[li][2]; cout = LCFG[li][3];
    ncols = LCFG[li][4]; bank = LCFG[li][6];
    ngg = (ns + NSV - 1) / NSV; nog = (cout + NOV - 1) / NOV;
    dcy = ((np + NPV - 1) / NPV) * ((ls + LSV - 1) / LSV);
    lcy = nog;
    model_layer(li);
    cfg = '{ls: 8'(ls), np: 8'(np), ns: 8'(ns), cout: 10'(cout), ncols: 10'(ncols),
            mode: dist_mode_e'(LCFG[li][5]), in_bank: bank[0], wt_bank: 1'(li % 2)};
    if (LCFG[li][5]) n_l2++; else n_l1++;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    outs_seen = 0;
    while (!done) begin
      @(posedge clk); #1;
      cycles++;
      if (out_valid) begin
        outs_seen++;
        for (int o = 0; o < NOV; o++) begin
          int co;
          co = int'(out_chan) + o;
          if (co < cout) begin
            checks++;
            if (!out_mask[o] || longint'($signed(out_data[o])) != yref[out_col][co]) begin
              failures++;
              if (failures < 20) $display("layer %0d col %0d ch %0d got %0d exp %0d", li, out_col, co,
                                          $signed(out_data[o]), yref[out_col][co]);
            end
            // the engine writes the quantized output into the other bank
            qbuf[1 - bank][out_col][co] = quant(yref[out_col][co], q_mult[1 - bank][subspace_of(1 - bank, co)],
                                                q_zp[1 - bank][subspace_of(1 - bank, co)], DB);
          end else if (out_mask[o]) begin failures++; $display("mask set beyond cout"); end
        end
      end
    end
    expected_outs = ncols * nog;
    checks++;
    if (outs_seen != expected_outs) begin failures++; $display("layer %0d: %0d output words, expected %0d", li, outs_seen, expected_outs); end
    bound = ncols * ngg * ((dcy > lcy) ? dcy : lcy);
    checks++;
    if (cycles < bound || cycles > bound + dcy + lcy + 10) begin
      failures++; $display("layer %0d: %0d cycles, model %0d", li, cycles, bound);
    end
    $display("layer %0d: %0d cycles, cycle model (Eq. 1) %0d", li, cycles, bound);
    if (li > 0) n_feedback++;
  endtask

  initial begin
    start = 0; cfg = '0;
    {in_wr_valid, in_wr_bank, q_wr_valid, q_wr_bank, dq_wr_valid, pr_wr_valid, lut_wr_valid} = '0;
    {dq_wr_bank, pr_wr_bank, lut_wr_bank} = '0;
    in_wr_col = '0; in_wr_row = '0; in_wr_mask = '0; in_wr_data = '0;
    q_wr_sub = '0; q_wr_ls = '0; q_wr_mult = '0; q_wr_zp = '0;
    dq_wr_sub = '0; dq_wr_scale = '0; dq_wr_zp = '0;
    pr_wr_sub = '0; pr_wr_proto = '0; pr_wr_chunk = '0; pr_wr_data = '0;
    lut_wr_grp = '0; lut_wr_og = '0; lut_wr_proto = '0; lut_wr_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // layer 0 input comes from external memory into its bank
    set_q(LCFG[0][6], LCFG[0][0], LCFG[0][7], 1 << (DB - 1));
    load_input(LCFG[0][6], LCFG[0][4], LCFG[0][0] * LCFG[0][2]);
    for (int li = 0; li < NLAYERS; li++) begin
      // the bank this layer writes will be read by the next layer: set its quantizer
      if (li + 1 < NLAYERS) set_q(1 - LCFG[li][6], LCFG[li + 1][0], LCFG[li + 1][7], 1 << (DB - 1));
      else                  set_q(1 - LCFG[li][6], 1, 64, 1 << (DB - 1));
      if (li == 0) load_layer(0);
      // the next layer's tables go into the other bank while this layer runs
      fork
        run_layer(li);
        if (li + 1 < NLAYERS) begin
          @(posedge busy);
          load_layer(li + 1);
        end
      join
    end
    $display("events: background_table_loads=%0d overlap=%0d stall=%0d saturate=%0d L1=%0d L2=%0d ddr_writes=%0d feedback_layers=%0d",
             n_bg_load, n_overlap, n_stall, n_sat, n_l1, n_l2, n_ddr, n_feedback);
    checks++;
    if (n_bg_load == 0 || n_overlap == 0 || n_stall == 0 || (CHECK_EVENTS && (n_sat == 0 || n_l1 == 0)) || n_l2 == 0 || n_ddr == 0 || n_feedback == 0) begin
      failures++; $display("a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
