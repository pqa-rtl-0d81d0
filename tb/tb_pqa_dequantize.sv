// tb_pqa_dequantize: checks the LUT_PQ dequantizer at 16 and 6 bits against
// the reference formula, including saturation to the 16-bit range.
module tb_pqa_dequantize;
  import pqa_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [15:0] q16, zp16, scale;
  logic [5:0]  q6, zp6;
  logic [15:0] y16, y6;

  pqa_dequantize #(.LBITS(16)) dut16 (.q(q16), .scale, .zero_point(zp16), .y(y16));
  pqa_dequantize #(.LBITS(6))  dut6  (.q(q6),  .scale, .zero_point(zp6),  .y(y6));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    longint e16, e6;
    #1;
    e16 = dequant(q16, scale, zp16);
    e6  = dequant(q6, scale, zp6);
    checks += 2;
    if (longint'($signed(y16)) != e16) begin failures++; $display("y16 q=%0d s=%0d zp=%0d got %0d exp %0d", q16, scale, zp16, $signed(y16), e16); end
    if (longint'($signed(y6)) != e6)   begin failures++; $display("y6 q=%0d s=%0d zp=%0d got %0d exp %0d", q6, scale, zp6, $signed(y6), e6); end
  endtask

  initial begin
    q16 = 16'd3;     zp16 = 16'd10; q6 = 6'd3;  zp6 = 6'd10; scale = 16'd384; check(); // -7*1.5 = -10.5 -> -11
    q16 = 16'hFFFF;  zp16 = 16'd0;  q6 = 6'd63; zp6 = 6'd0;  scale = 16'd512; check(); // saturates high
    q16 = 16'd0;     zp16 = 16'hFFFF; q6 = 6'd0; zp6 = 6'd63; scale = 16'd512; check(); // saturates low
    for (int i = 0; i < 2000; i++) begin
      q16 = 16'($urandom); zp16 = 16'($urandom); q6 = 6'($urandom); zp6 = 6'($urandom);
      scale = (i % 2) ? 16'($urandom_range(0, 300)) : 16'($urandom);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
