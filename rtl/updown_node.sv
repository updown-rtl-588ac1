// updown_node: an UpDown node, the top of the design.
//
// NACCEL accelerators of LANES lanes each share NSTACKS HBM stacks with a
// host CPU. Everything between them is a message: the host starts work by
// sending an event to a lane (or loads and reads scratchpads with
// MSG_SPD_WR / MSG_SPD_RD), lanes message each other and the host, and DRAM
// is reached by split-transaction request messages whose replies come back
// as events. A node crossbar joins the accelerators' up/down links, the host
// port and the stacks' request and response ports. DRAM requests are sent to
// the stack selected by address bits [8:6] (64-byte interleave across
// stacks); events go to the accelerator holding the destination lane, or to
// the host port when the destination is LID_HOST.
//
// The HBM stacks with their controllers and the host CPU are outside this
// module: their message streams are ports. A DRAM response must be a
// MSG_EVENT whose evw is the request's continuation (with the word count in
// bits [27:24]), dst that continuation's lane, addr the request address and
// data the words read (a write is acknowledged the same way with no words).
// Programs are loaded into every lane at once through the imem_* port.
//
// The numbers of accelerators, lanes and stacks are the paper's, as is
// every accelerator reaching every stack. The interleave and the network
// are this design's choices.
module updown_node
  import updown_pkg::*;
#(
  parameter int unsigned NACCEL     = 32,
  parameter int unsigned LANES      = 64,
  parameter int unsigned NSTACKS    = 8,
  parameter int unsigned NTHREADS   = 128,
  parameter int unsigned SPD_WORDS  = 8192,
  parameter int unsigned IMEM_DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  // host CPU
  input  logic             host_in_valid,
  output logic             host_in_ready,
  input  msg_t             host_in_msg,
  output logic             host_out_valid,
  input  logic             host_out_ready,
  output msg_t             host_out_msg,
  input  logic             imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_waddr,
  input  logic [31:0]      imem_wdata,
  // HBM stacks
  output logic [NSTACKS-1:0] hbm_req_valid,
  input  logic [NSTACKS-1:0] hbm_req_ready,
  output msg_t               hbm_req_msg [NSTACKS],
  input  logic [NSTACKS-1:0] hbm_rsp_valid,
  output logic [NSTACKS-1:0] hbm_rsp_ready,
  input  msg_t               hbm_rsp_msg [NSTACKS],
  output perf_t            perf
);
  localparam int unsigned LB = $clog2(LANES);
  localparam int unsigned SB = (NSTACKS > 1) ? $clog2(NSTACKS) : 1;
  // Crossbar ports: inputs  = accelerators, host, stack responses
  //                 outputs = accelerators, stack requests, host
  localparam int unsigned NI = NACCEL + 1 + NSTACKS;
  localparam int unsigned NO = NACCEL + NSTACKS + 1;
  localparam int unsigned OB = $clog2(NO);
  localparam int unsigned O_HOST = NACCEL + NSTACKS;

  logic [NI-1:0] xi_valid, xi_ready;
  logic [NO-1:0] xo_valid, xo_ready;
  msg_t          xi_msg [NI];
  msg_t          xo_msg [NO];
  logic [OB-1:0] xi_dst [NI];
  perf_t         aperf  [NACCEL];

  function automatic logic [OB-1:0] route(input msg_t m);
    if (m.kind == MSG_DRAM_RD || m.kind == MSG_DRAM_WR)
      return OB'(NACCEL) + OB'(m.addr[6 +: SB] % NSTACKS[SB:0]);
    if (m.dst == LID_HOST) return OB'(O_HOST);
    return OB'(m.dst[LID_W-1:LB] % NACCEL);
  endfunction

  for (genvar a = 0; a < NACCEL; a++) begin : g_acc
    updown_accel #(
      .LANES(LANES), .NTHREADS(NTHREADS), .SPD_WORDS(SPD_WORDS), .IMEM_DEPTH(IMEM_DEPTH)
    ) u_acc (
      .clk, .rst_n,
      .accel_id((LID_W-LB)'(a)),
      .up_valid(xi_valid[a]), .up_ready(xi_ready[a]), .up_msg(xi_msg[a]),
      .down_valid(xo_valid[a]), .down_ready(xo_ready[a]), .down_msg(xo_msg[a]),
      .imem_we, .imem_waddr, .imem_wdata,
      .perf(aperf[a])
    );
  end

  assign xi_valid[NACCEL] = host_in_valid;
  assign xi_msg[NACCEL]   = host_in_msg;
  assign host_in_ready    = xi_ready[NACCEL];
  for (genvar s = 0; s < NSTACKS; s++) begin : g_stack
    assign xi_valid[NACCEL+1+s]  = hbm_rsp_valid[s];
    assign xi_msg[NACCEL+1+s]    = hbm_rsp_msg[s];
    assign hbm_rsp_ready[s]      = xi_ready[NACCEL+1+s];
    assign hbm_req_valid[s]      = xo_valid[NACCEL+s];
    assign hbm_req_msg[s]        = xo_msg[NACCEL+s];
    assign xo_ready[NACCEL+s]    = hbm_req_ready[s];
  end
  assign host_out_valid   = xo_valid[O_HOST];
  assign host_out_msg     = xo_msg[O_HOST];
  assign xo_ready[O_HOST] = host_out_ready;

  always_comb
    for (int i = 0; i < NI; i++) xi_dst[i] = route(xi_msg[i]);

  msg_xbar #(.NI(NI), .NO(NO)) u_xbar (
    .clk, .rst_n,
    .in_valid(xi_valid), .in_ready(xi_ready), .in_msg(xi_msg), .in_dst(xi_dst),
    .out_valid(xo_valid), .out_ready(xo_ready), .out_msg(xo_msg)
  );

  always_comb begin
    perf = '0;
    for (int a = 0; a < NACCEL; a++) perf = perf_add(perf, aperf[a]);
  end
endmodule
