// tb_updown_lane_full: one lane at its default, full size (128 thread
// contexts, 64 KB scratchpad, 1024-instruction memory, 32-entry EventQ)
// with an HBM model of long latency behind it. The host starts 150 worker
// threads; each issues one 8-word split-transaction DRAM read, yields, is
// re-invoked by the response, sums the 8 words it finds in X8..X15 and
// reports the sum to the host before terminating. With 150 workers and
// only 128 contexts, all contexts fill with waiting threads and the last
// 22 first events must be deferred until a context frees. The testbench
// checks every sum, that exactly 128 reads were in flight at the peak,
// that every thread was created and terminated, and the scratchpad at its
// highest address; each mechanism must be seen at least once.
//
// The context count, scratchpad size and register-mapped operands follow
// the paper; the kernel, the encodings and the DRAM model are this
// testbench's own.
module tb_updown_lane_full;
  import updown_pkg::*;
  import updown_asm_pkg::*;

  localparam logic [15:0] MY = 16'h0002;
  localparam int NW = 150;
  localparam word_t DATA = 64'h0040_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, imem_we;
  msg_t in_msg, out_msg;
  logic [9:0] imem_waddr;
  logic [31:0] imem_wdata;
  perf_t perf;
  logic h_valid, r_valid, r_ready, q_valid;
  msg_t h_msg, r_msg;

  updown_lane dut (
    .clk, .rst_n, .lane_id(MY),
    .in_valid, .in_ready, .in_msg, .out_valid, .out_ready, .out_msg,
    .imem_we, .imem_waddr, .imem_wdata, .perf
  );

  wire is_dram = out_msg.kind == MSG_DRAM_RD || out_msg.kind == MSG_DRAM_WR;
  assign q_valid   = out_valid && is_dram;
  assign out_ready = 1'b1;
  hbm_model #(.LATENCY(600), .JITTER(40)) u_hbm (
    .clk, .rst_n, .req_valid(q_valid), .req_ready(), .req_msg(out_msg),
    .rsp_valid(r_valid), .rsp_ready(r_ready), .rsp_msg(r_msg)
  );
  assign in_valid = h_valid || r_valid;
  assign in_msg   = h_valid ? h_msg : r_msg;
  assign r_ready  = !h_valid && in_ready;

  int checks = 0, failures = 0;
  msg_t got[$];
  always @(posedge clk) if (rst_n && out_valid && out_ready && !is_dram) got.push_back(out_msg);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic mech(int n, string what);
    $display("mechanism %-34s %0d", what, n);
    chk(n > 0, {"mechanism happened: ", what});
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog: %0d messages back, %0d threads, %0d reads", got.size(), perf.threads_new, u_hbm.n_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // worker(addr): read 8 words, report their sum to the host, terminate
  localparam int L_W = 0, L_RET = 4;
  function automatic logic [31:0] prog(int a);
    case (a)
      0:  return i_i(OP_ADDI, 2, 6, 0);            // x6 = host continuation
      1:  return i_s(OP_SENDM, 8, 0, 8, L_RET);
      2:  return i_yield();
      4:  return i_r(OP_ADD, 8, 9, 16);
      5:  return i_r(OP_ADD, 16, 10, 16);
      6:  return i_r(OP_ADD, 16, 11, 16);
      7:  return i_r(OP_ADD, 16, 12, 16);
      8:  return i_r(OP_ADD, 16, 13, 16);
      9:  return i_r(OP_ADD, 16, 14, 16);
      10: return i_r(OP_ADD, 16, 15, 16);
      11: return i_s(OP_SENDR, 6, 16, 1, 0);
      default: return i_yieldt();
    endcase
  endfunction

  task automatic send(msg_t m);
    @(negedge clk);
    h_msg = m; h_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 h_valid = 0;
  endtask

  initial begin
    msg_t m, r;
    word_t exp [NW];
    bit seen [NW];
    int ok_sums = 0;
    h_valid = 0; h_msg = '0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 10'(i); imem_wdata = prog(i);
    end
    @(negedge clk); imem_we = 0;

    // host store and read at the top of the 64 KB scratchpad
    m = '0; m.kind = MSG_SPD_WR; m.dst = MY; m.addr = 64'hFFF8; m.nops = 1; m.data[0] = 64'h5A5A;
    send(m);
    m = '0; m.kind = MSG_SPD_RD; m.dst = MY; m.addr = 64'hFFF8; m.nops = 1; m.cont = mk_ev(LID_HOST, 0, 7);
    send(m);

    for (int i = 0; i < NW; i++) begin
      word_t s;
      s = '0;
      for (int j = 0; j < 8; j++) s += u_hbm.init_word(DATA + 64'(64 * i + 8 * j));
      exp[i] = s; seen[i] = 0;
      m = '0; m.kind = MSG_EVENT; m.dst = MY; m.evw = mk_ev(MY, TID_NEW, 16'(L_W));
      m.evw[27:24] = 1; m.nops = 1; m.cont = mk_ev(LID_HOST, 0, 0);
      m.data[0] = DATA + 64'(64 * i);
      send(m);
    end
    while (got.size() < NW + 1) @(posedge clk);
    repeat (10) @(posedge clk);
    chk(got.size() == NW + 1, "one message per worker plus the scratchpad read");
    while (got.size() > 0) begin
      r = got.pop_front();
      if (ev_label(r.evw) == 7) chk(r.data[0] == 64'h5A5A, "scratchpad word at the top address");
      else begin
        int k;
        k = -1;
        for (int i = 0; i < NW; i++) if (!seen[i] && exp[i] == r.data[0]) begin k = i; break; end
        if (k >= 0) begin seen[k] = 1; ok_sums++; end
      end
    end
    chk(ok_sums == NW, "every worker's sum is correct");
    chk(u_hbm.n_reads == NW, "one DRAM read per worker");
    chk(u_hbm.max_outstanding == 128, "all 128 contexts waiting on DRAM at the peak");
    chk(perf.threads_new == NW && perf.yieldts == NW, "every thread created and terminated");
    mech(perf.threads_new, "thread creation by first event");
    mech(perf.yields, "yield (thread suspended)");
    mech(perf.events - perf.threads_new, "event re-invokes a waiting thread");
    mech(perf.ctx_stalls, "first event deferred, contexts full");
    mech(u_hbm.n_reads, "split-transaction DRAM read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
