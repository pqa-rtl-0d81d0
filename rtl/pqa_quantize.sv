// pqa_quantize: asymmetric linear quantizer (the red "quantize" stage in front of
// the input buffer). A signed IN_W-bit value x becomes an unsigned DBITS-bit code
//     q = clamp( floor(x * mult / 2^Q_FRAC) + zero_point , 0 , 2^DBITS - 1 )
// where mult is the reciprocal of the quantization scale in fixed point with
// Q_FRAC fractional bits. Scale and zero point are supplied per subspace by the
// caller, which is how per-subspace quantization is realised.
// The quantizer itself follows the paper (asymmetric linear quantization of the
// values stored in the input buffer); the fixed-point form, floor rounding and
// clamping are this design's choice. Purely combinational.
module pqa_quantize #(
  parameter int unsigned DBITS  = 16,
  parameter int unsigned IN_W   = 16,
  parameter int unsigned Q_FRAC = 8
) (
  input  logic signed [IN_W-1:0]  x,
  input  logic        [15:0]      mult,        // 1/scale, Q_FRAC fractional bits
  input  logic        [DBITS-1:0] zero_point,
  output logic        [DBITS-1:0] q
);
  localparam int unsigned PW = IN_W + 17;      // product of x and {0,mult}
  localparam int unsigned SW = PW + 2;
  logic signed [PW-1:0] prod;
  logic signed [SW-1:0] shifted, biased;
  localparam logic signed [SW-1:0] QMAX = SW'((64'd1 << DBITS) - 1);

  always_comb begin
    prod    = PW'(x) * $signed({1'b0, mult});
    shifted = SW'(prod >>> Q_FRAC);
    biased  = shifted + $signed(SW'({1'b0, zero_point}));
    if (biased < 0)          q = '0;
    else if (biased > QMAX)  q = '1;
    else                     q = biased[DBITS-1:0];
  end
endmodule
