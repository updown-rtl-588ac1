// updown_accel: one UpDown accelerator, LANES lanes joined by a crossbar.
//
// Lane i of accelerator a has the global id a*LANES + i. Every message a
// lane sends is switched by the crossbar: an event or scratchpad access for
// a lane of this accelerator goes straight to that lane, everything else
// (DRAM requests, events for other accelerators or for the host) leaves on
// the up-link to the node network. Messages arriving on the down-link are
// switched to their lane the same way. Each crossbar output takes at most one
// message per cycle, chosen round-robin. The up- and down-links pass
// through LINKQ_DEPTH-entry queues, adding one cycle each way. The program-load port is
// broadcast to every lane, and the lanes' activity counters are summed on
// perf.
//
// The lane count and the scratchpad per lane (64 KB, 4 MB per accelerator)
// are the paper's; the crossbar is this design's choice, since the paper
// does not describe the on-chip network.
module updown_accel
  import updown_pkg::*;
#(
  parameter int unsigned LANES      = 64,
  parameter int unsigned NTHREADS   = 128,
  parameter int unsigned SPD_WORDS  = 8192,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned LINKQ_DEPTH = 4,
  localparam int unsigned LB = $clog2(LANES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LID_W-LB-1:0] accel_id,
  output logic             up_valid,
  input  logic             up_ready,
  output msg_t             up_msg,
  input  logic             down_valid,
  output logic             down_ready,
  input  msg_t             down_msg,
  input  logic             imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_waddr,
  input  logic [31:0]      imem_wdata,
  output perf_t            perf
);
  localparam int unsigned NP = LANES + 1;   // port LANES is the up/down link
  localparam int unsigned PB = $clog2(NP);

  logic [NP-1:0] xi_valid, xi_ready, xo_valid, xo_ready;
  msg_t          xi_msg [NP];
  msg_t          xo_msg [NP];
  logic [PB-1:0] xi_dst [NP];
  perf_t         lperf  [LANES];

  // Lane-bound messages for this accelerator go to their lane, all else up.
  function automatic logic [PB-1:0] route(input msg_t m, input logic [LID_W-LB-1:0] aid);
    if ((m.kind == MSG_EVENT || m.kind == MSG_SPD_WR || m.kind == MSG_SPD_RD) &&
        m.dst != LID_HOST && m.dst[LID_W-1:LB] == aid)
      return PB'(m.dst[LB-1:0]);
    return PB'(LANES);
  endfunction

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    updown_lane #(
      .NTHREADS(NTHREADS), .SPD_WORDS(SPD_WORDS), .IMEM_DEPTH(IMEM_DEPTH)
    ) u_lane (
      .clk, .rst_n,
      .lane_id({accel_id, LB'(i)}),
      .in_valid(xo_valid[i]), .in_ready(xo_ready[i]), .in_msg(xo_msg[i]),
      .out_valid(xi_valid[i]), .out_ready(xi_ready[i]), .out_msg(xi_msg[i]),
      .imem_we, .imem_waddr, .imem_wdata,
      .perf(lperf[i])
    );
  end

  // Registered queues on the up and down links keep the crossbars of
  // accelerator and node free of combinational paths through each other.
  net_if #(.DEPTH(LINKQ_DEPTH)) u_downq (
    .clk, .rst_n, .in_valid(down_valid), .in_ready(down_ready), .in_msg(down_msg),
    .out_valid(xi_valid[LANES]), .out_ready(xi_ready[LANES]), .out_msg(xi_msg[LANES])
  );
  net_if #(.DEPTH(LINKQ_DEPTH)) u_upq (
    .clk, .rst_n, .in_valid(xo_valid[LANES]), .in_ready(xo_ready[LANES]), .in_msg(xo_msg[LANES]),
    .out_valid(up_valid), .out_ready(up_ready), .out_msg(up_msg)
  );

  always_comb
    for (int i = 0; i < NP; i++) xi_dst[i] = route(xi_msg[i], accel_id);

  msg_xbar #(.NI(NP), .NO(NP)) u_xbar (
    .clk, .rst_n,
    .in_valid(xi_valid), .in_ready(xi_ready), .in_msg(xi_msg), .in_dst(xi_dst),
    .out_valid(xo_valid), .out_ready(xo_ready), .out_msg(xo_msg)
  );

  always_comb begin
    perf = '0;
    for (int i = 0; i < LANES; i++) perf = perf_add(perf, lperf[i]);
  end
endmodule
