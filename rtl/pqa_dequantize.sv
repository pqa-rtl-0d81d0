// pqa_dequantize: turns an unsigned LBITS-bit LUT_PQ code back into a signed
// OUT_W-bit (16-bit) partial dot product before accumulation:
//     y = sat( ((q - zero_point) * scale) >>> DQ_FRAC )
// scale is unsigned fixed point with DQ_FRAC fractional bits; scale and zero
// point are per subspace. Dequantizing to 16 bits ahead of the accumulator is
// the paper's; the fixed-point form and saturation are this design's choice.
// Purely combinational.
module pqa_dequantize #(
  parameter int unsigned LBITS   = 16,
  parameter int unsigned OUT_W   = 16,
  parameter int unsigned DQ_FRAC = 8
) (
  input  logic        [LBITS-1:0] q,
  input  logic        [15:0]      scale,
  input  logic        [LBITS-1:0] zero_point,
  output logic signed [OUT_W-1:0] y
);
  localparam int unsigned DW = LBITS + 1;
  localparam int unsigned PW = DW + 17;
  localparam logic signed [PW-1:0] YMAX = PW'((64'sd1 <<< (OUT_W-1)) - 1);
  localparam logic signed [PW-1:0] YMIN = -PW'(64'sd1 <<< (OUT_W-1));
  logic signed [DW-1:0] centred;
  logic signed [PW-1:0] prod, shifted;

  always_comb begin
    centred = $signed({1'b0, q}) - $signed({1'b0, zero_point});
    prod    = PW'(centred) * $signed({1'b0, scale});
    shifted = prod >>> DQ_FRAC;
    if (shifted > YMAX)      y = YMAX[OUT_W-1:0];
    else if (shifted < YMIN) y = YMIN[OUT_W-1:0];
    else                     y = shifted[OUT_W-1:0];
  end
endmodule
