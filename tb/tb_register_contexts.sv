// tb_register_contexts: writes random values into random (thread, register)
// pairs and reads them back on both ports against a model; checks that
// registers not stored here read as zero and ignore writes.
//
// 128 contexts of 16 general and 8 special registers follow the paper;
// which specials are stored and the port count are this design's choices.
module tb_register_contexts;
  import updown_pkg::*;
  localparam int N = 128;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [6:0] rtid, wtid;
  logic [4:0] ra, rb, wa;
  word_t da, db, wd;
  logic we;
  int checks = 0, failures = 0;
  word_t model [N][32];

  register_contexts #(.NTHREADS(N)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic bit stored(int r); return r >= 16 || r == 6 || r == 7; endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; rtid = 0; wtid = 0; ra = 0; rb = 0; wa = 0; wd = 0;
    @(negedge clk);
    for (int t = 0; t < N; t++) for (int r = 0; r < 32; r++) begin
      model[t][r] = stored(r) ? {$urandom, $urandom} : '0;
      wtid = 7'(t); wa = 5'(r); wd = stored(r) ? model[t][r] : {$urandom, $urandom}; we = 1;
      @(negedge clk);
    end
    we = 0;
    for (int i = 0; i < 3000; i++) begin
      automatic int t = $urandom_range(0, N - 1);
      rtid = 7'(t); ra = 5'($urandom); rb = 5'($urandom); #1;
      chk(da == model[t][ra], "read port A");
      chk(db == model[t][rb], "read port B");
      if ($urandom_range(0, 3) == 0) begin
        @(negedge clk);
        wtid = 7'($urandom_range(0, N - 1)); wa = 5'($urandom); wd = {$urandom, $urandom}; we = 1;
        if (stored(wa)) model[wtid][wa] = wd;
        @(negedge clk); we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
