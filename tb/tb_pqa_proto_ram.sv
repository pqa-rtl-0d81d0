// tb_pqa_proto_ram: writes random prototype chunks into every memory and
// address of a prototypes RAM, then reads every address back (one cycle
// latency) and checks all NP_VEC words against a model array.
module tb_pqa_proto_ram;
  localparam int NPV = 4, LSV = 2, DB = 6, DEPTH = 8;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [1:0] wsel;
  logic [2:0] waddr, raddr;
  logic [LSV-1:0][DB-1:0] wdata;
  logic [NPV-1:0][LSV-1:0][DB-1:0] rdata;
  logic [LSV-1:0][DB-1:0] model [NPV][DEPTH];

  pqa_proto_ram #(.NP_VEC(NPV), .LS_VEC(LSV), .DBITS(DB), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wsel = 0; waddr = 0; raddr = 0; wdata = '0;
    for (int round = 0; round < 3; round++) begin
      for (int k = 0; k < NPV; k++)
        for (int a = 0; a < DEPTH; a++) begin
          @(negedge clk);
          we = 1; wsel = 2'(k); waddr = 3'(a); wdata = (LSV*DB)'($urandom);
          model[k][a] = wdata;
        end
      @(negedge clk);
      we = 0;
      for (int a = 0; a < DEPTH; a++) begin
        raddr = 3'(a);
        @(negedge clk);
        for (int k = 0; k < NPV; k++) begin
          checks++;
          if (rdata[k] != model[k][a]) begin failures++; $display("k=%0d a=%0d got %h exp %h", k, a, rdata[k], model[k][a]); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
