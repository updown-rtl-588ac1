// tb_workload_tc: triangle counting, the graph-mining workload used to
// explain the programming model, run on a reduced node (2 accelerators of
// 4 lanes, 8 thread contexts per lane, 2 HBM stacks) with the same
// hierarchy of threads: a master thread spawns one vertex thread per
// vertex, spread over all lanes; a vertex thread reads its neighbour list
// from DRAM with one split-transaction read and spawns one intersect
// thread per neighbour; an intersect thread reads the neighbour's list,
// moves it into the scratchpad with bcpyol, reads the vertex's list again
// and counts the common entries with scratchpad loads. Counts flow back up
// as events: intersect -> vertex -> master -> host.
//
// Graph format (this testbench's choice): vertex v owns 8 words at
// ADJ + 64 v holding the byte addresses of the lists of its neighbours
// with a larger id, padded with all-ones. Storing list addresses instead
// of vertex ids avoids multiplications the small instruction set lacks;
// two entries are equal exactly when the vertices are. Each triangle
// u < v < w is counted once, on edge (u, v). The graph is random with at
// most 8 larger neighbours per vertex; the expected count is computed by
// brute force. The testbench also counts threads, yields, DRAM reads and
// deferred first events.
//
// The thread hierarchy follows the paper's triangle-counting example; the
// program, its encoding and the graph layout are this design's own.
module tb_workload_tc;
  import updown_pkg::*;
  import updown_asm_pkg::*;
  localparam int NACCEL = 2, LANES = 4, NSTACKS = 2, NLANES = NACCEL * LANES;
  localparam int V = 24;
  localparam word_t ADJ = 64'h0008_0000;
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

  updown_node #(.NACCEL(NACCEL), .LANES(LANES), .NSTACKS(NSTACKS), .NTHREADS(8),
                .SPD_WORDS(1024), .IMEM_DEPTH(128)) dut (.*);

  for (genvar s = 0; s < NSTACKS; s++) begin : g_hbm
    hbm_model #(.LATENCY(60), .JITTER(10)) u_hbm (
      .clk, .rst_n, .req_valid(hbm_req_valid[s]), .req_ready(hbm_req_ready[s]),
      .req_msg(hbm_req_msg[s]), .rsp_valid(hbm_rsp_valid[s]), .rsp_ready(hbm_rsp_ready[s]),
      .rsp_msg(hbm_rsp_msg[s])
    );
  end

  int checks = 0, failures = 0;
  msg_t got[$];
  assign host_out_ready = 1'b1;
  always @(posedge clk) if (rst_n && host_out_valid) got.push_back(host_out_msg);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic mech(int n, string what);
    $display("mechanism %-34s %0d", what, n);
    chk(n > 0, {"mechanism happened: ", what});
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ program
  localparam int M_RET = 13, VS = 20, V_ADJ = 27, V_DONE = 61, V_RET = 65,
                 IS = 72, I_A = 76, I_B = 86, I_L = 90, I_END = 111;
  logic [31:0] prog [128];
  task automatic build();
    for (int i = 0; i < 128; i++) prog[i] = i_yieldt();
    // master(V, ADJ, lane mask)
    prog[0]  = i_i(OP_ADDI, 2, 7, 0);          // x7 = host continuation
    prog[1]  = i_i(OP_ADDI, 8, 16, 0);         // x16 = V
    prog[2]  = i_i(OP_ADDI, 0, 20, 0);         // x20 = v
    prog[3]  = i_i(OP_ADDI, 9, 21, 0);         // x21 = list address of v
    prog[4]  = i_i(OP_ADDI, 0, 18, 0);         // x18 = triangles
    prog[5]  = i_i(OP_ADDI, 0, 19, 0);         // x19 = vertices reported
    prog[6]  = i_r(OP_AND, 20, 10, 23);        // loop: lane of v
    prog[7]  = i_i(OP_EVI, 23, 25, VS);
    prog[8]  = i_s(OP_SENDR, 25, 21, 1, M_RET);
    prog[9]  = i_i(OP_ADDI, 20, 20, 1);
    prog[10] = i_i(OP_ADDI, 21, 21, 64);
    prog[11] = i_i(OP_BLT, 20, 16, 6);
    prog[12] = i_yield();
    prog[13] = i_r(OP_ADD, 18, 8, 18);         // m_ret(count)
    prog[14] = i_i(OP_ADDI, 19, 19, 1);
    prog[15] = i_i(OP_BEQ, 19, 16, 17);
    prog[16] = i_yield();
    prog[17] = i_s(OP_SENDR, 7, 18, 1, 0);
    prog[18] = i_yieldt();
    // vertex(list address of v)
    prog[20] = i_i(OP_ADDI, 2, 6, 0);          // x6 = master
    prog[21] = i_i(OP_ADDI, 8, 16, 0);         // x16 = list of v
    prog[22] = i_i(OP_ADDI, 0, 18, 0);         // x18 = sum
    prog[23] = i_i(OP_ADDI, 0, 19, 0);         // x19 = intersect threads pending
    prog[24] = i_i(OP_ADDI, 0, 20, -1);        // x20 = padding word
    prog[25] = i_s(OP_SENDM, 16, 0, 8, V_ADJ);
    prog[26] = i_yield();
    prog[27] = i_i(OP_EVII, 0, 21, IS);        // v_adj(neighbours in x8..x15)
    prog[28] = i_i(OP_ADDI, 16, 23, 0);
    for (int k = 0; k < 8; k++) begin
      prog[29 + 4 * k] = i_i(OP_BEQ, 8 + k, 20, V_DONE);
      prog[30 + 4 * k] = i_i(OP_ADDI, 8 + k, 22, 0);
      prog[31 + 4 * k] = i_s(OP_SENDR, 21, 22, 2, V_RET);
      prog[32 + 4 * k] = i_i(OP_ADDI, 19, 19, 1);
    end
    prog[61] = i_i(OP_BEQ, 19, 0, 63);         // v_done
    prog[62] = i_yield();
    prog[63] = i_s(OP_SENDR, 6, 18, 1, 0);
    prog[64] = i_yieldt();
    prog[65] = i_r(OP_ADD, 18, 8, 18);         // v_ret(count)
    prog[66] = i_i(OP_SUBI, 19, 19, 1);
    prog[67] = i_i(OP_BEQ, 19, 0, 69);
    prog[68] = i_yield();
    prog[69] = i_s(OP_SENDR, 6, 18, 1, 0);
    prog[70] = i_yieldt();
    // intersect(list of u, list of v)
    prog[72] = i_i(OP_ADDI, 2, 6, 0);
    prog[73] = i_i(OP_ADDI, 9, 16, 0);
    prog[74] = i_s(OP_SENDM, 8, 0, 8, I_A);
    prog[75] = i_yield();
    prog[76] = i_i(OP_ADDI, 5, 17, 0);         // i_a: x17 = 64 * thread id
    for (int k = 0; k < 6; k++) prog[77 + k] = i_r(OP_ADD, 17, 17, 17);
    prog[83] = i_i(OP_BCPYOL, 8, 17, 64);      // list of u into the scratchpad
    prog[84] = i_s(OP_SENDM, 16, 0, 8, I_B);
    prog[85] = i_yield();
    prog[86] = i_i(OP_ADDI, 0, 18, 0);         // i_b: list of v in x8..x15
    prog[87] = i_i(OP_ADDI, 0, 19, 0);
    prog[88] = i_i(OP_ADDI, 0, 20, -1);
    prog[89] = i_i(OP_ADDI, 0, 23, 64);
    prog[90] = i_r(OP_ADD, 17, 19, 21);        // loop over the list of u
    prog[91] = i_i(OP_MOVLR, 21, 22, 0);
    prog[92] = i_i(OP_BEQ, 22, 20, I_END);
    for (int k = 0; k < 8; k++) begin
      prog[93 + 2 * k] = i_i(OP_BNE, 8 + k, 22, 95 + 2 * k);
      prog[94 + 2 * k] = i_i(OP_ADDI, 18, 18, 1);
    end
    prog[109] = i_i(OP_ADDI, 19, 19, 8);
    prog[110] = i_i(OP_BLT, 19, 23, I_L);
    prog[111] = i_s(OP_SENDR, 6, 18, 1, 0);    // i_end
    prog[112] = i_yieldt();
  endtask

  task automatic send(msg_t m);
    @(negedge clk);
    host_in_msg = m; host_in_valid = 1;
    do @(posedge clk); while (!host_in_ready);
    #1 host_in_valid = 0;
  endtask

  function automatic word_t la(int v); return ADJ + 64'(64 * v); endfunction
  function automatic void hwr(word_t a, word_t d);
    if (a[6]) g_hbm[1].u_hbm.wr(a, d); else g_hbm[0].u_hbm.wr(a, d);
  endfunction
  function automatic int hreads();
    return g_hbm[0].u_hbm.n_reads + g_hbm[1].u_hbm.n_reads;
  endfunction

  bit adj [V][V];
  initial begin
    msg_t m, r;
    int expect_tc, nedges, n;
    host_in_valid = 0; host_in_msg = '0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    build();
    // random graph: up to 8 larger neighbours per vertex
    nedges = 0;
    for (int u = 0; u < V; u++) begin
      n = 0;
      for (int v = u + 1; v < V; v++) begin
        adj[u][v] = (n < 8) && ($urandom_range(0, 99) < 45);
        if (adj[u][v]) n++;
      end
      for (int v = 0; v <= u; v++) adj[u][v] = 0;
    end
    for (int u = 0; u < V; u++) begin
      n = 0;
      for (int v = 0; v < V; v++) if (adj[u][v]) begin hwr(la(u) + 64'(8 * n), la(v)); n++; nedges++; end
      for (int i = n; i < 8; i++) hwr(la(u) + 64'(8 * i), '1);
    end
    expect_tc = 0;
    for (int u = 0; u < V; u++) for (int v = u + 1; v < V; v++) for (int w = v + 1; w < V; w++)
      if (adj[u][v] && adj[v][w] && adj[u][w]) expect_tc++;
    $display("graph: %0d vertices, %0d edges, %0d triangles", V, nedges, expect_tc);

    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 7'(i); imem_wdata = prog[i];
    end
    @(negedge clk); imem_we = 0;

    m = '0; m.kind = MSG_EVENT; m.dst = 0; m.evw = mk_ev(16'd0, TID_NEW, 16'd0);
    m.evw[27:24] = 3; m.nops = 3; m.cont = mk_ev(LID_HOST, 0, 0);
    m.data[0] = V; m.data[1] = ADJ; m.data[2] = NLANES - 1;
    send(m);
    while (got.size() == 0) @(posedge clk);
    r = got.pop_front();
    $display("triangles counted %0d, expected %0d, %0d cycles busy", r.data[0], expect_tc, perf.busy);
    chk(r.dst == LID_HOST && r.data[0] == word_t'(expect_tc), "triangle count");
    chk(expect_tc > 0, "graph has triangles");
    repeat (20) @(posedge clk);
    chk(perf.threads_new == 1 + V + nedges, "master, vertex and intersect threads");
    chk(perf.yieldts == perf.threads_new, "every thread terminated");
    chk(hreads() == V + 2 * nedges, "one list read per vertex, two per intersection");
    mech(perf.threads_new, "thread creation by first event");
    mech(perf.yields, "yield (thread suspended)");
    mech(perf.events - perf.threads_new, "event re-invokes a waiting thread");
    mech(hreads(), "split-transaction DRAM read");
    $display("deferred-first-event cycles %0d", perf.ctx_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
