// tb_pqa_quantize: checks the quantizer at 16 and 4 bits against the reference
// formula on random and corner values (negative inputs, clamping at both ends).
module tb_pqa_quantize;
  import pqa_ref_pkg::*;
  int checks = 0, failures = 0;
  logic signed [15:0] x;
  logic [15:0] mult;
  logic [15:0] zp16;
  logic [3:0]  zp4;
  logic [15:0] q16;
  logic [3:0]  q4;

  pqa_quantize #(.DBITS(16)) dut16 (.x, .mult, .zero_point(zp16), .q(q16));
  pqa_quantize #(.DBITS(4))  dut4  (.x, .mult, .zero_point(zp4),  .q(q4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    longint e16, e4;
    #1;
    e16 = quant(x, mult, zp16, 16);
    e4  = quant(x, mult, zp4, 4);
    checks += 2;
    if (longint'(q16) != e16) begin failures++; $display("q16 x=%0d m=%0d zp=%0d got %0d exp %0d", x, mult, zp16, q16, e16); end
    if (longint'(q4) != e4)   begin failures++; $display("q4 x=%0d m=%0d zp=%0d got %0d exp %0d", x, mult, zp4, q4, e4); end
  endtask

  initial begin
    x = -16'sd300; mult = 16'd256; zp16 = 16'd1000; zp4 = 4'd8; check();   // -300 + 1000, clamps to 0 at 4 bit
    x = 16'sd5;    mult = 16'd128; zp16 = 16'd0;    zp4 = 4'd7; check();   // 2.5 floors to 2
    x = -16'sd5;   mult = 16'd128; zp16 = 16'd10;   zp4 = 4'd7; check();   // -2.5 floors to -3
    x = 16'sd32767; mult = 16'hFFFF; zp16 = 16'hFFFF; zp4 = 4'hF; check(); // upper clamp
    x = -16'sd32768; mult = 16'hFFFF; zp16 = 16'd0; zp4 = 4'd0; check();   // lower clamp
    for (int i = 0; i < 2000; i++) begin
      x = 16'($urandom); mult = 16'($urandom_range(0, 1024)); zp16 = 16'($urandom); zp4 = 4'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
