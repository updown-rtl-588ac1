// tb_updown_lane: runs small UpDown programs on one lane (4 thread contexts,
// 8 KB scratchpad) with an HBM model behind it and the testbench acting as
// host. Programs exercise: add-class instructions on register-mapped
// operands with a reply by sendr (sum3); a split-transaction DRAM block read
// in the style of the paper's 2-event kernel, with the sendm issue rate of
// one request per 3 cycles checked (memory_read / read_return); scratchpad
// movrl, movlr, cswp and bcpy (spd_ops); evi, sendops to another lane and
// re-invocation of a waiting thread by its continuation (fwd); host
// scratchpad writes and reads; and exhaustion of the thread contexts, where
// a first event waits until a yieldt frees a context.
module tb_updown_lane;
  import updown_pkg::*;
  import updown_asm_pkg::*;

  localparam logic [15:0] MY = 16'h0005;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready, imem_we;
  msg_t in_msg, out_msg;
  logic [6:0] imem_waddr;
  logic [31:0] imem_wdata;
  perf_t perf;

  logic h_valid, r_valid, r_ready, q_valid;
  msg_t h_msg, r_msg;

  updown_lane #(.NTHREADS(4), .SPD_WORDS(1024), .IMEM_DEPTH(128)) dut (
    .clk, .rst_n, .lane_id(MY),
    .in_valid, .in_ready, .in_msg, .out_valid, .out_ready, .out_msg,
    .imem_we, .imem_waddr, .imem_wdata, .perf
  );

  wire is_dram = out_msg.kind == MSG_DRAM_RD || out_msg.kind == MSG_DRAM_WR;
  assign q_valid   = out_valid && is_dram;
  assign out_ready = 1'b1;
  hbm_model #(.LATENCY(30), .JITTER(6)) u_hbm (
    .clk, .rst_n, .req_valid(q_valid), .req_ready(), .req_msg(out_msg),
    .rsp_valid(r_valid), .rsp_ready(r_ready), .rsp_msg(r_msg)
  );
  // host messages take priority over DRAM replies
  assign in_valid = h_valid || r_valid;
  assign in_msg   = h_valid ? h_msg : r_msg;
  assign r_ready  = !h_valid && in_ready;

  int checks = 0, failures = 0;
  msg_t got[$];                       // events leaving the lane
  longint cyc = 0;
  longint dram_t[$];                  // cycles of DRAM requests
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && out_valid && out_ready && !is_dram) got.push_back(out_msg);
    if (rst_n && out_valid && out_ready && is_dram) dram_t.push_back(cyc);
  end

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

  // ------------------------------------------------------------ programs
  localparam int L_SUM3 = 0, L_MRD = 10, L_RRET = 20, L_RRET_NOT = 28, L_SPD = 40,
                 L_FWD = 60, L_FWD_RET = 65, L_PARK = 80, L_KILL = 81;
  logic [31:0] prog [128];
  task automatic build();
    for (int i = 0; i < 128; i++) prog[i] = i_yieldt();
    // sum3(a, b, c): reply to the continuation with a+b+c, a-b, a&b, a|b
    prog[0] = i_r(OP_ADD, 8, 9, 16);
    prog[1] = i_r(OP_ADD, 16, 10, 16);
    prog[2] = i_r(OP_SUB, 8, 9, 17);
    prog[3] = i_r(OP_AND, 8, 9, 18);
    prog[4] = i_r(OP_OR, 8, 9, 19);
    prog[5] = i_s(OP_SENDR, 2, 16, 4, 0);
    prog[6] = i_yieldt();
    // memory_read(start, end, spd_base): 8-word reads from start to end
    prog[10] = i_i(OP_ADDI, 8, 17, 0);         // x17 current address
    prog[11] = i_i(OP_ADDI, 8, 18, 0);         // x18 start
    prog[12] = i_i(OP_ADDI, 9, 19, 0);         // x19 end
    prog[13] = i_i(OP_ADDI, 10, 20, 0);        // x20 scratchpad base
    prog[14] = i_i(OP_ADDI, 2, 6, 0);          // x6 = who to tell when done
    prog[15] = i_s(OP_SENDM, 17, 0, 8, L_RRET); // loop: request 8 words
    prog[16] = i_i(OP_ADDI, 17, 17, 64);
    prog[17] = i_i(OP_BLT, 17, 19, 15);
    prog[18] = i_yield();
    // read_return(data x8-x15, addr x3)
    prog[20] = i_r(OP_SUB, 3, 18, 21);
    prog[21] = i_r(OP_ADD, 20, 21, 21);
    prog[22] = i_i(OP_BCPYOL, 8, 21, 64);
    prog[23] = i_i(OP_SUBI, 17, 17, 64);
    prog[24] = i_i(OP_BNE, 17, 18, L_RRET_NOT);
    prog[25] = i_s(OP_SENDR, 6, 17, 1, 0);     // done: tell the host
    prog[26] = i_yieldt();
    prog[28] = i_yield();
    // spd_ops(addr, val)
    prog[40] = i_i(OP_MOVRL, 9, 8, 0);
    prog[41] = i_i(OP_MOVLR, 8, 18, 0);
    prog[42] = i_i(OP_ADDI, 18, 16, 1);   // next rb differs from movlr's destination
    prog[43] = i_i(OP_MOVRL, 16, 8, 8);
    prog[44] = i_i(OP_ADDI, 9, 17, 0);
    prog[45] = i_i(OP_ADDI, 0, 18, 77);
    prog[46] = i_r(OP_CSWP, 8, 17, 18);
    prog[47] = i_i(OP_ADDI, 0, 19, 5);
    prog[48] = i_r(OP_CSWP, 8, 17, 19);
    prog[49] = i_i(OP_ADDI, 8, 20, 64);
    prog[50] = i_i(OP_BCPY, 8, 20, 16);
    prog[51] = i_s(OP_SENDR, 2, 16, 4, 0);
    prog[52] = i_yieldt();
    // fwd(lane, p, q): new thread on lane with our 3 operands, then wait
    prog[60] = i_i(OP_EVI, 8, 16, 0);
    prog[61] = i_s(OP_SENDOPS, 16, 0, 3, L_FWD_RET);
    prog[62] = i_yield();
    // fwd_ret(v): send v+1 to the host
    prog[65] = i_i(OP_ADDI, 8, 16, 1);
    prog[66] = i_i(OP_ADDI, 0, 17, -1);
    prog[67] = i_r(OP_EV, 17, 17, 18);
    prog[68] = i_s(OP_SENDR, 18, 16, 1, 0);
    prog[69] = i_yieldt();
    // park: a thread that only waits; kill: ends a parked thread
    prog[80] = i_yield();
    prog[81] = i_yieldt();
  endtask

  // ------------------------------------------------------------ host side
  word_t host_cont;
  assign host_cont = mk_ev(LID_HOST, 8'd0, 16'd0);

  task automatic send(msg_t m);
    @(negedge clk);
    h_msg = m; h_valid = 1;
    do @(posedge clk); while (!in_ready);
    #1 h_valid = 0;
  endtask
  task automatic event_to(int tid, int lbl, int n, word_t d[8]);
    msg_t m = '0;
    m.kind = MSG_EVENT; m.dst = MY; m.evw = mk_ev(MY, 8'(tid), 16'(lbl));
    m.evw[27:24] = 4'(n); m.cont = host_cont; m.nops = 4'(n);
    for (int i = 0; i < 8; i++) m.data[i] = d[i];
    send(m);
  endtask
  task automatic wait_got(int n, int max_cyc);
    int c = 0;
    while (got.size() < n && c < max_cyc) begin @(posedge clk); c++; end
    chk(got.size() >= n, "reply arrived");
  endtask
  task automatic spd_rd(word_t a, int n);
    msg_t m = '0;
    m.kind = MSG_SPD_RD; m.dst = MY; m.addr = a; m.nops = 4'(n); m.cont = host_cont;
    send(m);
    wait_got(1, 200);
  endtask

  initial begin
    word_t d[8];
    msg_t r;
    word_t a, b, c;
    int t0;
    h_valid = 0; h_msg = '0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    build();
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 7'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;

    // 1. host scratchpad write, then read back through an event
    begin
      msg_t m = '0;
      m.kind = MSG_SPD_WR; m.dst = MY; m.addr = 64'h200; m.nops = 4'd5;
      for (int i = 0; i < 8; i++) m.data[i] = 64'h1000 + 64'(i);
      send(m);
    end
    spd_rd(64'h200, 5);
    r = got.pop_front();
    chk(r.kind == MSG_EVENT && r.dst == LID_HOST && r.nops == 5, "spd read reply header");
    for (int i = 0; i < 5; i++) chk(r.data[i] == 64'h1000 + 64'(i), "spd write/read data");

    // 2. sum3 on a new thread, operands used in place, reply by sendr
    a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom};
    d = '{a, b, c, 0, 0, 0, 0, 0};
    event_to(TID_NEW, L_SUM3, 3, d);
    wait_got(1, 200);
    r = got.pop_front();
    chk(r.dst == LID_HOST && r.nops == 4 && r.evw[27:24] == 4, "sendr header");
    chk(r.data[0] == a + b + c, "add");
    chk(r.data[1] == a - b, "sub");
    chk(r.data[2] == (a & b), "and");
    chk(r.data[3] == (a | b), "or");
    chk(ev_lane(r.cont) == MY && ev_label(r.cont) == 0, "continuation names the lane");
    chk(perf.threads_new == 1 && perf.yieldts == 1, "thread created and terminated");

    // 3. split-transaction block read of 16 blocks into scratchpad 0x400
    d = '{64'h10000, 64'h10000 + 64'(16 * 64), 64'h400, 0, 0, 0, 0, 0};
    dram_t.delete();
    event_to(TID_NEW, L_MRD, 3, d);
    wait_got(1, 3000);
    r = got.pop_front();
    chk(r.nops == 1 && r.data[0] == 64'h10000, "memory_read completion event");
    chk(dram_t.size() == 16, "16 DRAM requests issued");
    for (int i = 1; i < dram_t.size(); i++) chk(dram_t[i] - dram_t[i-1] == 3, "sendm loop: one request per 3 cycles");
    chk(u_hbm.max_outstanding >= 8, "many requests in flight from one thread");
    for (int blk = 0; blk < 16; blk += 5) begin
      spd_rd(64'h400 + 64'(blk * 64), 8);
      r = got.pop_front();
      for (int i = 0; i < 8; i++)
        chk(r.data[i] == u_hbm.init_word(64'h10000 + 64'(blk * 64 + i * 8)), "DRAM data landed in scratchpad");
    end

    // 4. scratchpad instructions
    a = {$urandom, $urandom};
    d = '{64'h100, a, 0, 0, 0, 0, 0, 0};
    event_to(TID_NEW, L_SPD, 2, d);
    wait_got(1, 300);
    r = got.pop_front();
    chk(r.data[0] == a + 1, "movrl/movlr/addi");
    chk(r.data[1] == a, "addi copy");
    chk(r.data[2] == a, "cswp success returns old value");
    chk(r.data[3] == 77, "cswp failure returns current value");
    spd_rd(64'h100, 2);
    r = got.pop_front();
    chk(r.data[0] == 77 && r.data[1] == a + 1, "cswp stored, failing cswp did not");
    spd_rd(64'h140, 2);
    r = got.pop_front();
    chk(r.data[0] == 77 && r.data[1] == a + 1, "bcpy copied 2 words");

    // 5. evi + sendops to another lane, re-invocation through continuation
    d = '{64'd7, 64'd11, 64'd22, 0, 0, 0, 0, 0};
    event_to(TID_NEW, L_FWD, 3, d);
    wait_got(1, 200);
    r = got.pop_front();
    chk(r.dst == 16'h0007 && ev_tid(r.evw) == TID_NEW && ev_label(r.evw) == 0, "evi event word");
    chk(r.nops == 3 && r.data[0] == d[0] && r.data[1] == 11 && r.data[2] == 22, "sendops forwards operands");
    chk(ev_lane(r.cont) == MY && ev_label(r.cont) == L_FWD_RET, "sendops continuation");
    begin
      msg_t m = '0;
      m.kind = MSG_EVENT; m.dst = MY; m.evw = r.cont; m.evw[27:24] = 1; m.nops = 1; m.data[0] = 64'd99;
      send(m);
    end
    wait_got(1, 200);
    r = got.pop_front();
    chk(r.dst == LID_HOST && r.data[0] == 100, "waiting thread resumed by its continuation");

    // 6. thread exhaustion: park 4 threads, a 5th first event must wait
    for (int i = 0; i < 4; i++) event_to(TID_NEW, L_PARK, 0, d);
    d = '{64'd1, 64'd2, 64'd3, 0, 0, 0, 0, 0};
    event_to(TID_NEW, L_SUM3, 3, d);
    repeat (50) @(posedge clk);
    chk(got.size() == 0 && perf.ctx_stalls > 20, "first event waits while all contexts are taken");
    event_to(2, L_KILL, 0, d);
    wait_got(1, 200);
    r = got.pop_front();
    chk(r.data[0] == 6, "waiting first event ran after yieldt freed a context");
    chk(perf.events == perf.yields + perf.yieldts + 0, "every invocation ended by yield or yieldt");

    $display("perf: events=%0d new=%0d yields=%0d yieldts=%0d stalls=%0d dram=%0d msgs=%0d busy=%0d",
             perf.events, perf.threads_new, perf.yields, perf.yieldts, perf.ctx_stalls,
             perf.dram_reqs, perf.lane_msgs, perf.busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
