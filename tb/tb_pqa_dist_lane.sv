// tb_pqa_dist_lane: loads random prototypes for a random (Ls, Np, subspace
// group) into a lane, streams an input subspace through it as the sequencer
// would (address at issue, input chunk one cycle later) and checks the index
// of the closest prototype under L1 and L2 and its 3-cycle latency.
module tb_pqa_dist_lane;
  import pqa_pkg::*;
  localparam int LSV = 2, NPV = 4, NPM = 12, LSM = 6, DB = 8;
  localparam int PGM = 3, CHM = 3, DEPTH = 2 * PGM * CHM;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dist_mode_e mode;
  logic [7:0] np;
  logic pr_we;
  logic [1:0] pr_wsel;
  logic [4:0] pr_waddr, raddr;
  logic [LSV-1:0][DB-1:0] pr_wdata, x;
  logic issue, first_c, last_c, first_p, last_p;
  logic [7:0] pgrp;
  logic [LSV-1:0] elem_en;
  logic idx_valid;
  logic [3:0] idx;

  pqa_dist_lane #(.LS_VEC(LSV), .NP_VEC(NPV), .NP_MAX(NPM), .LS_MAX(LSM), .DBITS(DB), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [DB-1:0] proto [NPM][LSM];
    logic [DB-1:0] xin [LSM];
    {pr_we, issue, first_c, last_c, first_p, last_p} = '0;
    pr_wsel = 0; pr_waddr = 0; pr_wdata = '0; raddr = 0; pgrp = 0; elem_en = '0; x = '0;
    mode = DIST_L1; np = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int ls, nch, npg, gg, nsteps, best, lat;
      longint bestd;
      ls = $urandom_range(1, LSM); np = 8'($urandom_range(1, NPM)); gg = $urandom_range(0, 1);
      mode = (t % 2) ? DIST_L2 : DIST_L1;
      nch = (ls + LSV - 1) / LSV; npg = (int'(np) + NPV - 1) / NPV;
      // load prototypes (values kept small on some runs to force ties)
      for (int p = 0; p < NPM; p++)
        for (int e = 0; e < LSM; e++) proto[p][e] = (t % 5 == 0) ? DB'($urandom_range(0, 2)) : DB'($urandom);
      for (int p = 0; p < NPM; p++)
        for (int c = 0; c < CHM; c++) begin
          @(negedge clk);
          pr_we = 1; pr_wsel = 2'(p % NPV); pr_waddr = 5'((gg * PGM + p / NPV) * CHM + c);
          for (int e = 0; e < LSV; e++) pr_wdata[e] = (c * LSV + e < LSM) ? proto[p][c * LSV + e] : '0;
        end
      @(negedge clk);
      pr_we = 0;
      for (int e = 0; e < LSM; e++) xin[e] = (t % 5 == 0) ? DB'($urandom_range(0, 2)) : DB'($urandom);
      // reference
      best = -1; bestd = 0;
      for (int p = 0; p < np; p++) begin
        longint d;
        d = 0;
        for (int e = 0; e < ls; e++) begin
          longint df;
          df = longint'(xin[e]) - longint'(proto[p][e]);
          d += (mode == DIST_L2) ? df * df : (df < 0 ? -df : df);
        end
        if (best < 0 || d < bestd) begin best = p; bestd = d; end
      end
      // stream: step i = (pg, ch)
      nsteps = npg * nch;
      for (int i = 0; i <= nsteps; i++) begin
        @(negedge clk);
        if (i < nsteps) begin
          int pg, ch;
          pg = i / nch; ch = i % nch;
          issue = 1; first_c = (ch == 0); last_c = (ch == nch - 1);
          first_p = (pg == 0); last_p = (pg == npg - 1); pgrp = 8'(pg);
          raddr = 5'((gg * PGM + pg) * CHM + ch);
        end else begin
          issue = 0; first_c = 0; last_c = 0; first_p = 0; last_p = 0;
        end
        if (i > 0) begin
          int ch;
          ch = (i - 1) % nch;
          for (int e = 0; e < LSV; e++) begin
            elem_en[e] = (ch * LSV + e) < ls;
            x[e] = elem_en[e] ? xin[ch * LSV + e] : DB'($urandom);
          end
        end
      end
      // the last issue was one cycle ago; the index must appear 3 cycles after it
      lat = 1;
      while (!idx_valid && lat < 10) begin @(posedge clk); #1; lat++; end
      checks += 2;
      if (int'(idx) != best) begin failures++; $display("t=%0d ls=%0d np=%0d mode=%0d got %0d exp %0d", t, ls, np, mode, idx, best); end
      if (lat != 3) begin failures++; $display("t=%0d latency %0d", t, lat); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
