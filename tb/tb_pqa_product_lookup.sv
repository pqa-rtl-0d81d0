// tb_pqa_product_lookup: fills the LUT_PQ partitions of one output slot with
// random codes, then runs random lookups over 1..2 subspace groups and 1..3
// output groups in either table bank, supplying per-subspace dequantization parameters one cycle
// after issue, and checks each finished output two cycles after its last
// issue against a model (dequantize, sum enabled lanes, saturate).
module tb_pqa_product_lookup;
  import pqa_ref_pkg::*;
  localparam int NSV = 3, NPM = 4, GGM = 2, OGM = 3, LB = 6;
  localparam int DEPTH = 2 * GGM * OGM * NPM;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lut_we;
  logic [$clog2(DEPTH)-1:0] lut_waddr;
  logic [NSV-1:0][LB-1:0] lut_wdata;
  logic issue, bank, first_g, last_g;
  logic [0:0] g;
  logic [1:0] og;
  logic [NSV-1:0] lane_en;
  logic [NSV-1:0][1:0] idx;
  logic [NSV-1:0][15:0] dq_scale;
  logic [NSV-1:0][LB-1:0] dq_zp;
  logic out_valid, sat;
  logic signed [15:0] out;

  pqa_product_lookup #(.NS_VEC(NSV), .NP_MAX(NPM), .GG_MAX(GGM), .OG_MAX(OGM), .LBITS(LB)) dut (.*);

  logic [LB-1:0] lut [NSV][DEPTH];
  logic [15:0]   sc  [GGM*NSV];
  logic [LB-1:0] zp  [GGM*NSV];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {lut_we, issue, first_g, last_g} = '0;
    bank = 0; lut_waddr = 0; lut_wdata = '0; g = 0; og = 0; lane_en = '0; idx = '0; dq_scale = '0; dq_zp = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      lut_we = 1; lut_waddr = 6'(a);
      for (int l = 0; l < NSV; l++) begin lut_wdata[l] = LB'($urandom); lut[l][a] = lut_wdata[l]; end
    end
    @(negedge clk);
    lut_we = 0;
    for (int t = 0; t < 300; t++) begin
      int ngg, nog, ns;
      longint acc [OGM];
      logic [1:0] gidx [GGM][NSV];
      ngg = $urandom_range(1, GGM); nog = $urandom_range(1, OGM);
      bank = 1'($urandom);
      ns = $urandom_range((ngg - 1) * NSV + 1, ngg * NSV);
      for (int s = 0; s < GGM * NSV; s++) begin
        sc[s] = (t % 3 == 0) ? 16'($urandom_range(0, 65535)) : 16'($urandom_range(0, 600));
        zp[s] = LB'($urandom);
      end
      for (int gg = 0; gg < ngg; gg++)
        for (int l = 0; l < NSV; l++) gidx[gg][l] = 2'($urandom);
      // model
      for (int o = 0; o < nog; o++) begin
        acc[o] = 0;
        for (int gg = 0; gg < ngg; gg++) begin
          longint s;
          s = acc[o];
          for (int l = 0; l < NSV; l++)
            if (gg * NSV + l < ns)
              s += dequant(lut[l][((int'(bank) * GGM + gg) * OGM + o) * NPM + gidx[gg][l]], sc[gg * NSV + l], zp[gg * NSV + l]);
          acc[o] = pqa_ref_pkg::sat(s);
        end
      end
      // stream, then check outputs as they appear
      fork
        begin
          for (int i = 0; i <= ngg * nog; i++) begin
            @(negedge clk);
            if (i < ngg * nog) begin
              int gg, o;
              gg = i / nog; o = i % nog;
              issue = 1; first_g = (gg == 0); last_g = (gg == ngg - 1); g = 1'(gg); og = 2'(o);
              for (int l = 0; l < NSV; l++) begin lane_en[l] = (gg * NSV + l) < ns; idx[l] = gidx[gg][l]; end
            end else issue = 0;
            if (i > 0) begin
              int gp;
              gp = (i - 1) / nog;
              for (int l = 0; l < NSV; l++) begin dq_scale[l] = sc[gp * NSV + l]; dq_zp[l] = zp[gp * NSV + l]; end
            end
          end
        end
        begin
          int seen;
          seen = 0;
          // first output: 2 cycles after the issue of (last group, og 0)
          repeat ((ngg - 1) * nog + 2) @(posedge clk);
          for (int o = 0; o < nog; o++) begin
            @(posedge clk); #1;
            checks++;
            if (!out_valid || longint'(out) != acc[o]) begin
              failures++; $display("t=%0d og=%0d valid=%0d got %0d exp %0d", t, o, out_valid, out, acc[o]);
            end
          end
        end
      join
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
