// thread_table: lightweight thread contexts of one lane.
//
// Each of the NTHREADS contexts is Free, Active or Waiting. A first event
// (one that carries the "new thread" id) takes the lowest free context,
// offered every cycle on alloc_ok/alloc_tid, which
// becomes Active when the scheduler also raises act_en for it. An event for
// an existing thread makes a Waiting thread Active (act_en). The running
// thread leaves Active by yield (to Waiting) or yieldt (back to Free). All
// changes take effect at the next clock edge.
//
// The states and transitions follow the paper's thread life cycle; the
// allocation order and the behaviour when every context is taken (the event
// waits) are this design's choices.
module thread_table #(
  parameter int unsigned NTHREADS = 128,
  localparam int unsigned TW = $clog2(NTHREADS)
) (
  input  logic          clk,
  input  logic          rst_n,
  output logic          alloc_ok,
  output logic [TW-1:0] alloc_tid,
  input  logic          act_en,
  input  logic [TW-1:0] act_tid,
  input  logic          yield_en,
  input  logic          term_en,
  input  logic [TW-1:0] cur_tid,
  output logic [TW:0]   free_count,
  output logic [NTHREADS-1:0] waiting
);
  typedef enum logic [1:0] {T_FREE = 2'd0, T_ACTIVE = 2'd1, T_WAIT = 2'd2} tstate_e;
  tstate_e st [NTHREADS];

  always_comb begin
    alloc_ok  = 1'b0;
    alloc_tid = '0;
    for (int i = NTHREADS - 1; i >= 0; i--)
      if (st[i] == T_FREE) begin
        alloc_ok  = 1'b1;
        alloc_tid = TW'(i);
      end
  end

  always_comb begin
    free_count = '0;
    for (int i = 0; i < NTHREADS; i++) begin
      free_count += (TW+1)'(st[i] == T_FREE);
      waiting[i]  = (st[i] == T_WAIT);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NTHREADS; i++) st[i] <= T_FREE;
    end else begin
      if (yield_en) st[cur_tid] <= T_WAIT;
      if (term_en)  st[cur_tid] <= T_FREE;
      if (act_en)   st[act_tid] <= T_ACTIVE;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(yield_en && term_en));
  assert property (@(posedge clk) disable iff (!rst_n) (yield_en || term_en) |-> st[cur_tid] == T_ACTIVE);
endmodule
