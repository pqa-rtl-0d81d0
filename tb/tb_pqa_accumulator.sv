// tb_pqa_accumulator: drives random lookups for several output groups over
// 1..3 subspace groups, interleaving output groups as the sequencer does, and
// checks every finished output (one cycle after the last group) and the
// saturation pulse against a 16-bit saturating model.
module tb_pqa_accumulator;
  import pqa_ref_pkg::*;
  localparam int NSV = 4, OGM = 4;
  int checks = 0, failures = 0, sat_seen = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, first, last;
  logic [1:0] og;
  logic [NSV-1:0] lane_en;
  logic [NSV-1:0][15:0] vals;
  logic out_valid, sat;
  logic signed [15:0] out;
  longint model [OGM];

  pqa_accumulator #(.NS_VEC(NSV), .ACC_W(16), .OG_MAX(OGM)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; first = 0; last = 0; og = 0; lane_en = '0; vals = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int ngrp, nog;
      bit big;
      ngrp = $urandom_range(1, 3);
      nog  = $urandom_range(1, OGM);
      big  = (t % 4 == 0);
      for (int g = 0; g < ngrp; g++)
        for (int o = 0; o < nog; o++) begin
          longint s, pre;
          bit exp_sat;
          @(negedge clk);
          in_valid = 1; first = (g == 0); last = (g == ngrp - 1); og = 2'(o);
          lane_en = NSV'($urandom_range(1, 15));
          pre = first ? 0 : model[o];
          s = pre;
          for (int l = 0; l < NSV; l++) begin
            vals[l] = big ? 16'($urandom) : 16'($urandom_range(0, 2000) - 1000);
            if (lane_en[l]) s += longint'($signed(vals[l]));
          end
          model[o] = pqa_ref_pkg::sat(s);
          exp_sat = (s != model[o]);
          @(posedge clk); #1;
          checks++;
          if (sat != exp_sat) begin failures++; $display("sat got %0d exp %0d", sat, exp_sat); end
          if (sat) sat_seen++;
          if (last) begin
            checks++;
            if (!out_valid || longint'(out) != model[o]) begin
              failures++; $display("t=%0d og=%0d got %0d exp %0d", t, o, out, model[o]);
            end
          end else if (out_valid) begin failures++; $display("unexpected out_valid"); end
        end
      @(negedge clk);
      in_valid = 0;
    end
    if (sat_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
