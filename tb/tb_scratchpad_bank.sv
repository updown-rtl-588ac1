// tb_scratchpad_bank: random writes and reads over the whole 64 KB bank
// against a model, checking that read data appears one cycle after en.
//
// 64 KB per lane follows the paper; the single port and one-cycle read
// latency are this design's choices.
module tb_scratchpad_bank;
  import updown_pkg::*;
  localparam int W = 8192;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [12:0] addr;
  word_t wdata, rdata;
  int checks = 0, failures = 0;
  word_t model [W];

  scratchpad_bank dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0;
    @(negedge clk);
    for (int a = 0; a < W; a++) begin
      model[a] = {$urandom, $urandom};
      en = 1; we = 1; addr = 13'(a); wdata = model[a]; @(negedge clk);
    end
    for (int i = 0; i < 5000; i++) begin
      automatic int a = $urandom_range(0, W - 1);
      if ($urandom_range(0, 1)) begin
        model[a] = {$urandom, $urandom};
        en = 1; we = 1; addr = 13'(a); wdata = model[a]; @(negedge clk);
      end else begin
        en = 1; we = 0; addr = 13'(a); @(negedge clk);
        en = 0; addr = 13'($urandom);
        chk(rdata == model[a], "read data one cycle after en");
        @(negedge clk);
        chk(rdata == model[a], "read data held while en is low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
