// tb_updown_node: end-to-end test of a reduced node (2 accelerators of 4
// lanes, 2 HBM stacks, 4 thread contexts per lane) running the gather-sum
// kernel of updown_asm_pkg. The host stores a marker into a scratchpad,
// loads the program, and starts a master thread on lane 0 that spawns 40
// worker threads spread over all 8 lanes; each worker reads 8 words from
// DRAM by a split-transaction request, adds them, writes the sum back,
// waits for the write acknowledgement and reports to the master, which
// sends the grand total to the host. The HBM latency is long enough that
// more than 4 workers wait on one lane, so first events must be deferred
// until contexts free up. The testbench checks the total against its own
// sum, the words written to DRAM, the marker read back from the scratchpad,
// and counts each mechanism: thread creation, yield, re-invocation, yieldt,
// context exhaustion, DRAM reads and writes with several in flight,
// messages between accelerators, and host stores and reads. A mechanism
// that never happened counts as a failure.
//
// The node structure (accelerators, lanes, HBM stacks, host) follows the
// paper at reduced size; the kernel, its encoding and the DRAM model
// are this testbench's own.
module tb_updown_node;
  import updown_pkg::*;
  import updown_asm_pkg::*;
  localparam int NACCEL = 2, LANES = 4, NSTACKS = 2, NLANES = NACCEL * LANES;
  localparam int W = 40;
  localparam word_t DATA = 64'h0010_0000, RES = 64'h0020_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_in_valid, host_in_ready, host_out_valid, host_out_ready, imem_we;
  msg_t host_in_msg, host_out_msg;
  logic [6:0] imem_waddr;
  logic [31:0] imem_wdata;
  logic [NSTACKS-1:0] hbm_req_valid, hbm_req_ready, hbm_rsp_valid, hbm_rsp_ready;
  msg_t hbm_req_msg [NSTACKS];
  msg_t hbm_rsp_msg [NSTACKS];
  perf_t perf;

  updown_node #(.NACCEL(NACCEL), .LANES(LANES), .NSTACKS(NSTACKS), .NTHREADS(4),
                .SPD_WORDS(1024), .IMEM_DEPTH(128)) dut (.*);

  int hb_reads [NSTACKS];
  int hb_writes [NSTACKS];
  int hb_maxout [NSTACKS];
  for (genvar s = 0; s < NSTACKS; s++) begin : g_hbm
    hbm_model #(.LATENCY(200), .JITTER(20)) u_hbm (
      .clk, .rst_n, .req_valid(hbm_req_valid[s]), .req_ready(hbm_req_ready[s]),
      .req_msg(hbm_req_msg[s]), .rsp_valid(hbm_rsp_valid[s]), .rsp_ready(hbm_rsp_ready[s]),
      .rsp_msg(hbm_rsp_msg[s])
    );
    always @(posedge clk) begin
      hb_reads[s]  <= u_hbm.n_reads;
      hb_writes[s] <= u_hbm.n_writes;
      hb_maxout[s] <= u_hbm.max_outstanding;
    end
  end

  int checks = 0, failures = 0;
  msg_t got[$];
  int x_acc = 0;      // messages delivered into accelerator 1
  assign host_out_ready = 1'b1;
  always @(posedge clk) begin
    if (rst_n && host_out_valid) got.push_back(host_out_msg);
    if (rst_n && dut.xo_valid[1] && dut.xo_ready[1]) x_acc++;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic mech(int n, string what);
    $display("mechanism %-34s %0d", what, n);
    chk(n > 0, {"mechanism happened: ", what});
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send(msg_t m);
    @(negedge clk);
    host_in_msg = m; host_in_valid = 1;
    do @(posedge clk); while (!host_in_ready);
    #1 host_in_valid = 0;
  endtask
  task automatic wait_got(int max_cyc);
    int c = 0;
    while (got.size() == 0 && c < max_cyc) begin @(posedge clk); c++; end
    chk(got.size() > 0, "host received a message");
  endtask
  function automatic word_t init_word(word_t a); return {16'hD0D0, a[47:0]}; endfunction

  initial begin
    msg_t m, r;
    word_t total;
    int t0, n_spd = 0;
    host_in_valid = 0; host_in_msg = '0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 7'(i); imem_wdata = gs_prog(i);
    end
    @(negedge clk); imem_we = 0;

    // host store into the last lane's scratchpad
    m = '0; m.kind = MSG_SPD_WR; m.dst = 16'(NLANES - 1); m.addr = 64'h80; m.nops = 2;
    m.data[0] = 64'hCAFE; m.data[1] = 64'hBEEF;
    send(m); n_spd++;

    // start the master on lane 0
    m = '0; m.kind = MSG_EVENT; m.dst = 0; m.evw = mk_ev(16'd0, TID_NEW, 16'(GS_START));
    m.evw[27:24] = 5; m.nops = 5; m.cont = mk_ev(LID_HOST, 0, 0);
    m.data[0] = W; m.data[1] = DATA; m.data[2] = RES; m.data[3] = 1; m.data[4] = NLANES - 1;
    t0 = $time;
    send(m);
    wait_got(100000);
    r = got.pop_front();
    total = '0;
    for (int i = 0; i < W; i++) for (int j = 0; j < 8; j++) total += init_word(DATA + 64'(64 * i + 8 * j));
    chk(r.dst == LID_HOST && r.nops == 1 && r.data[0] == total, "grand total from the master");
    for (int i = 0; i < W; i += 7) begin
      word_t s, a, got_w;
      s = '0; a = RES + 64'(8 * i);
      for (int j = 0; j < 8; j++) s += init_word(DATA + 64'(64 * i + 8 * j));
      got_w = a[6] ? g_hbm[1].u_hbm.rd(a) : g_hbm[0].u_hbm.rd(a);
      chk(got_w == s, "worker sum written to DRAM");
    end

    // host read of the marker
    m = '0; m.kind = MSG_SPD_RD; m.dst = 16'(NLANES - 1); m.addr = 64'h80; m.nops = 2;
    m.cont = mk_ev(LID_HOST, 0, 0);
    send(m); n_spd++;
    wait_got(1000);
    r = got.pop_front();
    chk(r.data[0] == 64'hCAFE && r.data[1] == 64'hBEEF, "host scratchpad store and read");
    repeat (20) @(posedge clk);

    chk(perf.threads_new == W + 1, "one thread per worker plus the master");
    chk(perf.yieldts == W + 1, "every thread terminated");
    chk(hb_reads[0] + hb_reads[1] == W && hb_writes[0] + hb_writes[1] == W, "one read and one write per worker");
    mech(perf.threads_new, "thread creation by first event");
    mech(perf.yields, "yield (thread suspended)");
    mech(perf.events - perf.threads_new, "event re-invokes a waiting thread");
    mech(perf.yieldts, "yieldt (thread terminated)");
    mech(perf.ctx_stalls, "first event deferred, contexts full");
    mech(hb_reads[0] + hb_reads[1], "split-transaction DRAM read");
    mech(hb_writes[0] + hb_writes[1], "split-transaction DRAM write");
    mech(hb_reads[0] * hb_reads[1], "both HBM stacks used");
    mech((hb_maxout[0] > 1 ? 1 : 0) + (hb_maxout[1] > 1 ? 1 : 0), "several DRAM requests in flight");
    mech(x_acc, "message between accelerators");
    mech(n_spd, "host scratchpad store/read");
    $display("outstanding max %0d/%0d, lane busy cycles %0d, run %0d time units",
             hb_maxout[0], hb_maxout[1], perf.busy, $time - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
