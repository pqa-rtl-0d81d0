// tb_pqa_lut_mem: random writes and reads on one LUT_PQ partition with a
// model array; reads are checked one cycle after their address, also when a
// write happens in the same cycle.
module tb_pqa_lut_mem;
  localparam int LB = 6, DEPTH = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [5:0] waddr, raddr;
  logic [LB-1:0] wdata, rdata;
  logic [LB-1:0] model [DEPTH];

  pqa_lut_mem #(.LBITS(LB), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [LB-1:0] exp_q;
    we = 0;
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); we = 1; waddr = 6'(a); wdata = LB'($urandom); model[a] = wdata;
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      raddr = 6'($urandom);
      exp_q = model[raddr];            // value before this cycle's write (read-first)
      we = $urandom_range(0, 1); waddr = 6'($urandom); wdata = LB'($urandom);
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata != exp_q) begin failures++; $display("a=%0d got %0d exp %0d", raddr, rdata, exp_q); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
