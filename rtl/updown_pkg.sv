// updown_pkg: types and constants shared by every UpDown block.
//
// An UpDown machine moves work around as messages. A message carries an
// event word (which handler to run, on which thread, on which lane), a
// continuation word (the event the receiver should answer to), an address
// (DRAM or scratchpad), and up to eight 64-bit operand words. DRAM requests
// and DRAM responses use the same format: a response is simply an event
// addressed by the request's continuation, carrying the data as operands.
//
// Register namespace seen by a handler (follows the paper's figures):
//   X0      constant zero                      (this design's choice)
//   X1      current event word                 (paper)
//   X2      continuation word of the message   (this design's choice)
//   X3      address of a DRAM response         (paper, read_return example)
//   X4      global id of this lane             (this design's choice)
//   X5      id of the running thread           (this design's choice)
//   X6..X7  writable per-thread special regs   (this design's choice)
//   X8..X15 operands of the event, read straight from the operand buffer
//   X16..X31 the 16 general purpose registers of the thread
//
// Event word layout (this design's choice; the paper gives no encoding):
//   [15:0] handler label (instruction address), [23:16] thread id
//   (8'hFF asks for a new thread), [27:24] operand count, [47:32] lane id.
// Instruction encoding (this design's choice, 32 bits):
//   [31:26] opcode, [25:21] ra, [20:16] rb, [15:11] rc, [15:0] imm16.
//   Destination last, as in the paper's assembly listings.
package updown_pkg;

  localparam int unsigned WORD_W   = 64;
  localparam int unsigned MAX_OPS  = 8;
  localparam int unsigned LBL_W    = 16;
  localparam int unsigned TID_W    = 8;
  localparam int unsigned LID_W    = 16;
  localparam int unsigned OPB_W    = 10;   // operand buffer address, up to 1024 words
  localparam logic [TID_W-1:0] TID_NEW  = 8'hFF;
  localparam logic [LID_W-1:0] LID_HOST = 16'hFFFF;

  typedef logic [WORD_W-1:0] word_t;

  typedef enum logic [2:0] {
    MSG_EVENT   = 3'd0,  // event to a lane (or the host)
    MSG_DRAM_RD = 3'd1,  // split-transaction DRAM read, nops words
    MSG_DRAM_WR = 3'd2,  // split-transaction DRAM write, nops words
    MSG_SPD_WR  = 3'd3,  // store from the host into a lane scratchpad
    MSG_SPD_RD  = 3'd4   // host read of a lane scratchpad, answered as an event to cont
  } msg_kind_e;

  typedef struct packed {
    msg_kind_e          kind;
    logic [LID_W-1:0]   dst;    // destination lane for lane-bound kinds
    word_t              evw;    // event word
    word_t              cont;   // continuation word
    word_t              addr;   // DRAM / scratchpad / response address
    logic [3:0]         nops;   // operand words, 0..8
    word_t [MAX_OPS-1:0] data;
  } msg_t;

  // Entry of the event queue: everything but the operand words, which live
  // in the operand buffer.
  typedef struct packed {
    msg_kind_e  kind;
    word_t      evw;
    word_t      cont;
    word_t      addr;
    logic [3:0] nops;
    logic [OPB_W-1:0] opbase;  // first operand-buffer word of the event
  } evq_entry_t;

  // Per-lane activity counters, summed by the accelerator and the node.
  typedef struct packed {
    logic [31:0] events;        // event invocations dispatched
    logic [31:0] threads_new;   // thread contexts created by a first event
    logic [31:0] yields;        // invocations ended by yield (thread kept)
    logic [31:0] yieldts;       // threads terminated by yieldt
    logic [31:0] ctx_stalls;    // cycles a first event waited for a free context
    logic [31:0] dram_reqs;     // DRAM read and write requests sent
    logic [31:0] lane_msgs;     // events sent to lanes or the host
    logic [31:0] busy;          // cycles the lane was not idle
  } perf_t;

  function automatic perf_t perf_add(perf_t a, perf_t b);
    perf_t r;
    r.events      = a.events      + b.events;
    r.threads_new = a.threads_new + b.threads_new;
    r.yields      = a.yields      + b.yields;
    r.yieldts     = a.yieldts     + b.yieldts;
    r.ctx_stalls  = a.ctx_stalls  + b.ctx_stalls;
    r.dram_reqs   = a.dram_reqs   + b.dram_reqs;
    r.lane_msgs   = a.lane_msgs   + b.lane_msgs;
    r.busy        = a.busy        + b.busy;
    return r;
  endfunction

  function automatic logic [LBL_W-1:0] ev_label(word_t w); return w[15:0];  endfunction
  function automatic logic [TID_W-1:0] ev_tid(word_t w);   return w[23:16]; endfunction
  function automatic logic [LID_W-1:0] ev_lane(word_t w);  return w[47:32]; endfunction
  function automatic word_t mk_ev(logic [LID_W-1:0] lane, logic [TID_W-1:0] tid,
                                  logic [LBL_W-1:0] lbl);
    return {16'd0, lane, 4'd0, 4'd0, tid, lbl};
  endfunction

  typedef enum logic [5:0] {
    OP_YIELD   = 6'd0,   // end invocation, keep thread (Active -> Wait)
    OP_YIELDT  = 6'd1,   // end invocation, free thread
    OP_ADD     = 6'd2,   // rc = ra + rb
    OP_SUB     = 6'd3,   // rc = ra - rb
    OP_AND     = 6'd4,
    OP_OR      = 6'd5,
    OP_ADDI    = 6'd6,   // rb = ra + sext(imm16)
    OP_SUBI    = 6'd7,   // rb = ra - sext(imm16)
    OP_BEQ     = 6'd8,   // if ra == rb pc = imm16
    OP_BNE     = 6'd9,
    OP_BLT     = 6'd10,  // signed
    OP_BLE     = 6'd11,
    OP_BGT     = 6'd12,
    OP_MOVLR   = 6'd13,  // rb = spd[ra + sext(imm16)]
    OP_MOVRL   = 6'd14,  // spd[rb + sext(imm16)] = ra
    OP_BCPY    = 6'd15,  // copy imm16 words spd[ra..] -> spd[rb..]
    OP_BCPYOL  = 6'd16,  // copy imm16 operand words X8.. -> spd[rb..]
    OP_CSWP    = 6'd17,  // rc: if spd[ra]==rb then spd[ra]=rc; rc=old
    OP_SEND    = 6'd18,  // event ra, operands spd[rb..], n=imm[15:13]+1, cont label imm[12:0]
    OP_SENDR   = 6'd19,  // event ra, operands rb..rb+n-1
    OP_SENDOPS = 6'd20,  // event ra, operands X8..X8+n-1
    OP_SENDM   = 6'd21,  // DRAM read of n words at ra, reply to label
    OP_SENDMR  = 6'd22,  // DRAM write of rb..rb+n-1 at ra, ack to label
    OP_SENDMOPS= 6'd23,  // DRAM write of X8.. at ra, ack to label
    OP_EV      = 6'd24,  // rc = event word {lane ra, thread rb, label imm[10:0]} (11-bit label)
    OP_EVI     = 6'd25,  // rb = event word {lane ra, new thread, label imm16}
    OP_EVII    = 6'd26   // rb = event word {this lane, new thread, label imm16}
  } opcode_e;

endpackage
