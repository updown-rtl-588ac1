// hbm_model: behavioural model of one HBM2e stack with its controller, for
// simulation only (not synthesizable).
//
// Accepts one split-transaction request per cycle (MSG_DRAM_RD or
// MSG_DRAM_WR, 1..8 words at a byte address) and answers each after
// LATENCY plus a random 0..JITTER cycles, so replies may come back out of
// order. A read is answered with an event to the request's continuation
// carrying the words; a write with an event carrying no words. Each answer
// has addr set to the request address. Words never written read as
// init_word(byte address). It records the largest number of requests it has
// held at once (max_outstanding) and the counts of reads and writes.
// Testbenches preload data with wr() and inspect memory with rd().
//
// The stack count and the split-transaction request/response behaviour follow
// the paper; latency, jitter and the initial memory contents are this
// testbench's own choices.
module hbm_model
  import updown_pkg::*;
#(
  parameter int LATENCY = 40,
  parameter int JITTER  = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic req_valid,
  output logic req_ready,
  input  msg_t req_msg,
  output logic rsp_valid,
  input  logic rsp_ready,
  output msg_t rsp_msg
);
  word_t mem [logic [63:0]];
  typedef struct { longint due; msg_t m; } pend_t;
  pend_t pend[$];
  longint now = 0;
  int max_outstanding = 0, n_reads = 0, n_writes = 0;

  function automatic word_t init_word(logic [63:0] a);
    return {16'hD0D0, a[47:0]};
  endfunction
  function automatic void wr(logic [63:0] a, word_t d);
    mem[a] = d;
  endfunction
  function automatic word_t rd(logic [63:0] a);
    return mem.exists(a) ? mem[a] : init_word(a);
  endfunction

  assign req_ready = 1'b1;

  int pick = -1;
  initial begin rsp_valid = 1'b0; rsp_msg = '0; end

  always @(posedge clk) begin
    now <= now + 1;
    if (rsp_valid && rsp_ready) pend.delete(pick);
    if (rst_n && req_valid) begin
      automatic pend_t p;
      automatic msg_t r = '0;
      r.kind = MSG_EVENT;
      r.dst  = ev_lane(req_msg.cont);
      r.addr = req_msg.addr;
      if (req_msg.kind == MSG_DRAM_RD) begin
        n_reads++;
        r.nops = req_msg.nops;
        for (int i = 0; i < int'(req_msg.nops); i++) r.data[i] = rd(req_msg.addr + 64'(8 * i));
      end else begin
        n_writes++;
        r.nops = 4'd0;
        for (int i = 0; i < int'(req_msg.nops); i++) mem[req_msg.addr + 64'(8 * i)] = req_msg.data[i];
      end
      r.evw = {req_msg.cont[63:28], r.nops, req_msg.cont[23:0]};
      p.due = now + LATENCY + $urandom_range(0, JITTER);
      p.m   = r;
      pend.push_back(p);
      if (pend.size() > max_outstanding) max_outstanding = pend.size();
    end
    // present the earliest due response on the next cycle
    pick = -1;
    for (int i = 0; i < pend.size(); i++)
      if (pend[i].due <= now && (pick < 0 || pend[i].due < pend[pick].due)) pick = i;
    rsp_valid <= rst_n && (pick >= 0);
    rsp_msg   <= (pick >= 0) ? pend[pick].m : '0;
  end
endmodule
