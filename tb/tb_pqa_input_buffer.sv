// tb_pqa_input_buffer: fills both banks through the masked WR_N-wide write
// port (including writes that run past the last row) and reads whole columns
// back one cycle later, comparing with a model of both banks.
module tb_pqa_input_buffer;
  localparam int NIN = 12, COLS = 6, DB = 5, WN = 4;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, wbank, rbank;
  logic [2:0] wcol, rcol;
  logic [3:0] wrow;
  logic [WN-1:0] wmask;
  logic [WN-1:0][DB-1:0] wdata;
  logic [NIN-1:0][DB-1:0] rdata;
  logic [DB-1:0] model [2][COLS][NIN];

  pqa_input_buffer #(.NIN_MAX(NIN), .COLS_MAX(COLS), .DBITS(DB), .WR_N(WN)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int bk, input int c, input int r, input logic [WN-1:0] m);
    @(negedge clk);
    we = 1; wbank = bk[0]; wcol = 3'(c); wrow = 4'(r); wmask = m; wdata = (WN*DB)'($urandom);
    for (int i = 0; i < WN; i++)
      if (m[i] && r + i < NIN) model[bk][c][r + i] = wdata[i];
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    we = 0; rbank = 0; rcol = 0;
    for (int bk = 0; bk < 2; bk++)
      for (int c = 0; c < COLS; c++)
        for (int r = 0; r < NIN; r += WN) wr(bk, c, r, '1);
    for (int t = 0; t < 300; t++)
      wr($urandom_range(0, 1), $urandom_range(0, COLS - 1), $urandom_range(0, NIN - 1), WN'($urandom));
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      rbank = $urandom_range(0, 1); rcol = 3'($urandom_range(0, COLS - 1));
      @(negedge clk);
      for (int r = 0; r < NIN; r++) begin
        checks++;
        if (rdata[r] != model[rbank][rcol][r]) begin
          failures++; $display("b=%0d c=%0d r=%0d got %0d exp %0d", rbank, rcol, r, rdata[r], model[rbank][rcol][r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
