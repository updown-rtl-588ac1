// tb_thread_table: walks contexts through the thread life cycle (first
// event -> Active, yield -> Wait, event -> Active, yieldt -> Free), checks
// lowest-free allocation, the free count and exhaustion of all contexts.
//
// The life cycle is the paper's; lowest-free allocation is this design's.
module tb_thread_table;
  localparam int N = 128;
  localparam int TW = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic alloc_ok, act_en, yield_en, term_en;
  logic [TW-1:0] alloc_tid, act_tid, cur_tid;
  logic [TW:0] free_count;
  logic [N-1:0] waiting;
  int checks = 0, failures = 0;

  thread_table #(.NTHREADS(N)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic create(output int t);
    t = int'(alloc_tid);
    act_tid = alloc_tid; act_en = 1; @(negedge clk); act_en = 0;
  endtask
  task automatic yield_t(int t); cur_tid = TW'(t); yield_en = 1; @(negedge clk); yield_en = 0; endtask
  task automatic term_t(int t);  cur_tid = TW'(t); term_en = 1; @(negedge clk); term_en = 0; endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t;
    act_en = 0; yield_en = 0; term_en = 0; act_tid = 0; cur_tid = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    chk(alloc_ok && alloc_tid == 0 && free_count == N, "all free after reset");
    // allocate every context, each yields to Wait
    for (int i = 0; i < N; i++) begin
      chk(alloc_ok && int'(alloc_tid) == i, "lowest free context offered");
      create(t); yield_t(t);
      chk(waiting[i], "yield leaves thread waiting");
      chk(int'(free_count) == N - 1 - i, "free count after create");
    end
    chk(!alloc_ok, "no context when all taken");
    // an event resumes thread 37, which then terminates
    act_tid = 37; act_en = 1; @(negedge clk); act_en = 0;
    chk(!waiting[37], "event makes waiting thread active");
    term_t(37);
    chk(alloc_ok && alloc_tid == 37 && free_count == 1, "yieldt frees the context");
    // free a lower one: it becomes the next offered
    act_tid = 5; act_en = 1; @(negedge clk); act_en = 0; term_t(5);
    chk(alloc_tid == 5 && free_count == 2, "lowest of several free contexts");
    for (int i = 0; i < N; i++) if (i != 5 && i != 37) begin
      act_tid = TW'(i); act_en = 1; @(negedge clk); act_en = 0; term_t(i);
    end
    chk(free_count == N && waiting == '0, "all free again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
