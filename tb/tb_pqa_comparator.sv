// tb_pqa_comparator: feeds random distances for 1..3 prototype groups with a
// random prototype count np and checks the index of the minimum (lowest index
// on ties) one cycle after the last group.
module tb_pqa_comparator;
  localparam int NPV = 4, NPM = 12, DW = 10;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, first, last;
  logic [7:0] pgrp, np;
  logic [NPV-1:0][DW-1:0] dists;
  logic idx_valid;
  logic [$clog2(NPM)-1:0] idx;
  logic [DW-1:0] min_dist;

  pqa_comparator #(.NP_VEC(NPV), .NP_MAX(NPM), .DIST_W(DW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; first = 0; last = 0; pgrp = 0; np = 1; dists = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      int ngrp, best, bestd;
      np   = 8'($urandom_range(1, NPM));
      ngrp = (int'(np) + NPV - 1) / NPV;
      best = -1; bestd = 0;
      for (int g = 0; g < ngrp; g++) begin
        @(negedge clk);
        in_valid = 1; first = (g == 0); last = (g == ngrp - 1); pgrp = 8'(g);
        for (int k = 0; k < NPV; k++) begin
          int p;
          p = g * NPV + k;
          dists[k] = DW'((t % 3 == 0) ? $urandom_range(0, 7) : $urandom);  // small range forces ties
          if (p < np && (best < 0 || int'(dists[k]) < bestd)) begin best = p; bestd = int'(dists[k]); end
        end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!idx_valid || int'(idx) != best || int'(min_dist) != bestd) begin
        failures++;
        $display("t=%0d np=%0d got %0d/%0d exp %0d/%0d", t, np, idx, min_dist, best, bestd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
