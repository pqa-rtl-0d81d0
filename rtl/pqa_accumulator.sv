// pqa_accumulator: the 16-bit accumulator of one output slot. Each valid cycle
// it adds the NS_VEC dequantized lookups of the lanes whose subspace exists
// (lane_en) and adds the sum to the partial result of output group og, kept
// in a small state array. On the first subspace group the old state is
// ignored; on the last the finished output is presented (out_valid one cycle
// after the input). Values saturate at the 16-bit range; sat pulses when they do.
// An accumulator (not only an adder tree) is needed because the subspaces of
// an output arrive over several cycles: that is the paper's; the saturating
// arithmetic is this design's choice.
module pqa_accumulator #(
  parameter int unsigned NS_VEC = 16,
  parameter int unsigned ACC_W  = 16,
  parameter int unsigned OG_MAX = 16,
  localparam int unsigned OW = (OG_MAX > 1) ? $clog2(OG_MAX) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic                               first,   // first subspace group
  input  logic                               last,    // last subspace group
  input  logic [OW-1:0]                      og,
  input  logic [NS_VEC-1:0]                  lane_en,
  input  logic [NS_VEC-1:0][ACC_W-1:0]       vals,    // signed
  output logic                               out_valid,
  output logic signed [ACC_W-1:0]            out,
  output logic                               sat
);
  localparam int unsigned SW = ACC_W + $clog2(NS_VEC + 1) + 1;
  localparam logic signed [SW-1:0] AMAX = SW'((64'sd1 <<< (ACC_W-1)) - 1);
  localparam logic signed [SW-1:0] AMIN = -SW'(64'sd1 <<< (ACC_W-1));

  logic signed [ACC_W-1:0] state [OG_MAX];
  logic signed [SW-1:0] total;
  logic signed [ACC_W-1:0] next;
  logic next_sat;

  always_comb begin
    total = first ? '0 : SW'(state[og]);
    for (int l = 0; l < NS_VEC; l++)
      if (lane_en[l]) total += SW'($signed(vals[l]));
    next_sat = 1'b0;
    if (total > AMAX)      begin next = AMAX[ACC_W-1:0]; next_sat = 1'b1; end
    else if (total < AMIN) begin next = AMIN[ACC_W-1:0]; next_sat = 1'b1; end
    else                         next = total[ACC_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (in_valid) state[og] <= next;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid && last;
      sat       <= in_valid && next_sat;
      if (in_valid && last) out <= next;
    end
  end
endmodule
