// pqa_input_buffer: on-chip store of layer inputs, already quantized to DBITS.
// Two banks of COLS_MAX columns of NIN_MAX elements (the unrolled rows). One
// bank holds the input of the running layer while the other receives its
// quantized outputs, which become the next layer's input. Write: WR_N
// consecutive rows row_base.. of one column per cycle, with a per-element
// mask. Read: a whole column per cycle, registered (one cycle latency), from
// which the sequencer picks the chunks for the distance lanes.
// Holding the layer input on chip and writing outputs back into it is the
// paper's; the two banks and the port shapes are this design's choice.
module pqa_input_buffer #(
  parameter int unsigned NIN_MAX  = 128,
  parameter int unsigned COLS_MAX = 128,
  parameter int unsigned DBITS    = 16,
  parameter int unsigned WR_N     = 16,
  localparam int unsigned CW = (COLS_MAX > 1) ? $clog2(COLS_MAX) : 1,
  localparam int unsigned RW = $clog2(NIN_MAX + 1)
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic                            wbank,
  input  logic [CW-1:0]                   wcol,
  input  logic [RW-1:0]                   wrow,     // first row written
  input  logic [WR_N-1:0]                 wmask,
  input  logic [WR_N-1:0][DBITS-1:0]      wdata,
  input  logic                            rbank,
  input  logic [CW-1:0]                   rcol,
  output logic [NIN_MAX-1:0][DBITS-1:0]   rdata
);
  logic [NIN_MAX-1:0][DBITS-1:0] mem [2*COLS_MAX];

  always_ff @(posedge clk) begin
    if (we)
      for (int i = 0; i < WR_N; i++)
        if (wmask[i] && (int'(wrow) + i) < NIN_MAX)
          mem[int'(wbank) * COLS_MAX + int'(wcol)][int'(wrow) + i] <= wdata[i];
    rdata <= mem[int'(rbank) * COLS_MAX + int'(rcol)];
  end
endmodule
