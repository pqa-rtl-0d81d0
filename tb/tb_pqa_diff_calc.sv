// tb_pqa_diff_calc: streams random subspaces of 1..4 chunks through one
// difference calculator in L1 and L2 mode, with some elements disabled, and
// compares each total distance (one cycle after the last chunk) with a model.
module tb_pqa_diff_calc;
  import pqa_pkg::*;
  localparam int LSV = 4, DB = 8, LSM = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  dist_mode_e mode;
  logic in_valid, first, last;
  logic [LSV-1:0] elem_en;
  logic [LSV-1:0][DB-1:0] x, b;
  logic dist_valid;
  logic [2*DB+$clog2(LSM+1)-1:0] dists;

  pqa_diff_calc #(.LS_VEC(LSV), .DBITS(DB), .LS_MAX(LSM)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_d;
    in_valid = 0; first = 0; last = 0; elem_en = '0; x = '0; b = '0; mode = DIST_L1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      int nch;
      nch  = $urandom_range(1, 4);
      mode = (t % 2) ? DIST_L2 : DIST_L1;
      exp_d = 0;
      for (int c = 0; c < nch; c++) begin
        @(negedge clk);
        in_valid = 1; first = (c == 0); last = (c == nch - 1);
        for (int e = 0; e < LSV; e++) begin
          longint d;
          x[e] = DB'($urandom); b[e] = DB'($urandom); elem_en[e] = ($urandom_range(0, 5) != 0);
          d = longint'(x[e]) - longint'(b[e]);
          if (elem_en[e]) exp_d += (mode == DIST_L2) ? d * d : (d < 0 ? -d : d);
        end
      end
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!dist_valid || longint'(dists) != exp_d) begin
        failures++;
        $display("t=%0d mode=%0d valid=%0d got %0d exp %0d", t, mode, dist_valid, dists, exp_d);
      end
      if ($urandom_range(0, 1)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
