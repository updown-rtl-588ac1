// tb_updown_accel: one accelerator of 4 lanes (id 3, so lanes 12..15) with
// the testbench acting as node network, HBM and host. A ping event on one
// lane starts a new thread on another lane of the same accelerator, which
// reads DRAM through the up-link and reports the word to the host; a ping
// addressed to a lane of another accelerator must leave on the up-link.
// Checks routing, the data returned, and the summed activity counters.
//
// 64 lanes per accelerator follow the paper (4 are used here to keep the
// run short); the crossbar and the lane numbering are this design's.
module tb_updown_accel;
  import updown_pkg::*;
  import updown_asm_pkg::*;
  localparam int LANES = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic up_valid, up_ready, down_valid, down_ready, imem_we;
  msg_t up_msg, down_msg;
  logic [6:0] imem_waddr;
  logic [31:0] imem_wdata;
  perf_t perf;
  logic r_valid, r_ready, h_valid;
  msg_t r_msg, h_msg;

  updown_accel #(.LANES(LANES), .NTHREADS(4), .SPD_WORDS(1024), .IMEM_DEPTH(128)) dut (
    .clk, .rst_n, .accel_id(14'd3),
    .up_valid, .up_ready, .up_msg, .down_valid, .down_ready, .down_msg,
    .imem_we, .imem_waddr, .imem_wdata, .perf
  );

  wire up_dram = up_msg.kind == MSG_DRAM_RD || up_msg.kind == MSG_DRAM_WR;
  assign up_ready = 1'b1;
  hbm_model #(.LATENCY(20), .JITTER(4)) u_hbm (
    .clk, .rst_n, .req_valid(up_valid && up_dram), .req_ready(), .req_msg(up_msg),
    .rsp_valid(r_valid), .rsp_ready(r_ready), .rsp_msg(r_msg)
  );
  assign down_valid = h_valid || r_valid;
  assign down_msg   = h_valid ? h_msg : r_msg;
  assign r_ready    = !h_valid && down_ready;

  int checks = 0, failures = 0;
  msg_t got[$];
  always @(posedge clk)
    if (rst_n && up_valid && up_ready && !up_dram) got.push_back(up_msg);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] prog(int a);
    case (a)
      0:  return i_i(OP_EVI, 8, 16, 10);       // ping(dst, addr)
      1:  return i_s(OP_SENDR, 16, 9, 1, 0);
      2:  return i_yieldt();
      10: return i_s(OP_SENDM, 8, 0, 1, 20);   // pong(addr)
      11: return i_yield();
      20: return i_i(OP_ADDI, 8, 16, 0);       // got(word)
      21: return i_i(OP_ADDI, 0, 17, -1);
      22: return i_r(OP_EV, 17, 17, 18);
      23: return i_r(OP_OR, 16, 4, 16);        // tag with the lane id (X4)
      24: return i_s(OP_SENDR, 18, 16, 1, 0);
      25: return i_yieldt();
      default: return i_yieldt();
    endcase
  endfunction

  task automatic send(msg_t m);
    @(negedge clk);
    h_msg = m; h_valid = 1;
    do @(posedge clk); while (!down_ready);
    #1 h_valid = 0;
  endtask
  task automatic ping(int lane, int dst, word_t a);
    msg_t m = '0;
    m.kind = MSG_EVENT; m.dst = 16'(3 * LANES + lane);
    m.evw = mk_ev(16'(3 * LANES + lane), TID_NEW, 16'd0); m.evw[27:24] = 2; m.nops = 2;
    m.cont = mk_ev(LID_HOST, 0, 0); m.data[0] = 64'(dst); m.data[1] = a;
    send(m);
  endtask

  initial begin
    msg_t r;
    int c;
    h_valid = 0; h_msg = '0; imem_we = 0; imem_waddr = 0; imem_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); imem_we = 1; imem_waddr = 7'(i); imem_wdata = prog(i);
    end
    @(negedge clk); imem_we = 0;
    ping(1, 14, 64'h5000);   // lane 13 -> lane 14 -> DRAM -> host
    ping(3, 12, 64'h7008);   // lane 15 -> lane 12
    ping(0, 1, 64'h9000);    // lane 12 -> lane 1 of accelerator 0 (leaves)
    c = 0;
    while (got.size() < 3 && c < 2000) begin @(posedge clk); c++; end
    chk(got.size() == 3, "three messages left the accelerator");
    for (int i = 0; i < got.size(); i++) begin
      r = got[i];
      if (r.dst == 16'd1) begin
        chk(ev_tid(r.evw) == TID_NEW && ev_label(r.evw) == 10 && r.data[0] == 64'h9000,
            "event for another accelerator goes up unchanged");
        chk(ev_lane(r.cont) == 16'd12, "continuation names the sending lane");
      end else if (r.data[0][3:0] == 4'd14) begin
        chk(r.dst == LID_HOST && r.data[0] == (u_hbm.init_word(64'h5000) | 64'd14), "lane 14 reports DRAM word");
      end else begin
        chk(r.dst == LID_HOST && r.data[0] == (u_hbm.init_word(64'h7008) | 64'd12), "lane 12 reports DRAM word");
      end
    end
    repeat (20) @(posedge clk);
    chk(perf.events == 7 && perf.threads_new == 5 && perf.dram_reqs == 2 && perf.lane_msgs == 5,
        "activity counters summed over lanes");
    chk(u_hbm.n_reads == 2, "two DRAM reads through the up-link");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
