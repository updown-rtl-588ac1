// tb_imem: loads random instructions and reads them back at random pcs.
//
// The instruction memory is this design's own (the paper does not say
// where handler code is kept).
module tb_imem;
  localparam int D = 1024;
  logic clk = 0;
  always #5 clk = ~clk;
  logic we;
  logic [9:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [D];
  int checks = 0, failures = 0;

  imem dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; wdata = 0; raddr = 0;
    @(negedge clk);
    for (int a = 0; a < D; a++) begin
      model[a] = $urandom; we = 1; waddr = 10'(a); wdata = model[a]; @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      raddr = 10'($urandom); #1;
      checks++;
      if (rdata != model[raddr]) begin failures++; $display("FAIL imem read %0d", raddr); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
