// updown_lane: one UpDown lane, an event-driven multithreaded processor.
//
// Work reaches a lane only as messages. An arriving event is split in one
// cycle: its operand words go to the operand buffer, the rest to the
// EventQ. When the lane is idle the head event is dispatched in a single
// cycle: an event carrying the "new thread" id takes a free thread context,
// any other event resumes the waiting thread it names, and execution starts
// at the event's label. A first event that finds all contexts taken is set
// aside in a deferred queue so that later events, which may free a context,
// are not blocked behind it; deferred events run, oldest first, as soon as a
// context is free. (Stalling the EventQ instead deadlocks whenever every
// context waits for a reply queued behind the stalled event.) The handler reads its operands in place as X8..X15,
// the event word as X1, the continuation as X2 and a DRAM response address
// as X3, so short handlers need no copy instructions. It ends with yield
// (thread kept, waits for its next event) or yieldt (thread freed); either
// releases the operands and lets the next event run.
//
// Send-class instructions build whole messages of 1..8 words. sendm,
// sendmr and sendmops are split-transaction DRAM accesses: the request
// carries a continuation naming this lane, the running thread and a handler
// label, and the reply comes back later as an ordinary event. Nothing in the
// lane tracks outstanding requests, so a thread may have any number in
// flight.
//
// Host messages ("stores from the top") use the same queue: MSG_SPD_WR
// writes its operands into the scratchpad at addr; MSG_SPD_RD reads nops
// words at addr and answers with an event to the message's continuation.
//
// Timing (this design's choice): one instruction per cycle for add-class,
// branch, movrl, ev*, yield and a sendm that finds the network interface
// ready; movlr and cswp take 2 cycles; bcpy 2 cycles per word; bcpyol one
// cycle per word; send/sendr/sendops/sendmr/sendmops one cycle to decode
// plus one per gathered word (two per scratchpad word) plus one to hand the
// message over. A sendm loop of sendm, addi, blt therefore issues one 8-word
// DRAM request every 3 cycles, the rate the paper quotes.
//
// From the paper: the block structure, 128 thread contexts with 16 general
// and 8 special registers, 64 KB scratchpad, register-mapped operands, the
// thread life cycle and the instruction names. This design's own: the
// instruction and event encodings (see updown_pkg), the cycle counts above,
// the instruction memory, and the host message kinds. cstr is not provided.
module updown_lane
  import updown_pkg::*;
#(
  parameter int unsigned NTHREADS   = 128,
  parameter int unsigned SPD_WORDS  = 8192,
  parameter int unsigned IMEM_DEPTH = 1024,
  parameter int unsigned EVQ_DEPTH  = 32,
  parameter int unsigned NETQ_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [LID_W-1:0] lane_id,
  // messages from the network
  input  logic             in_valid,
  output logic             in_ready,
  input  msg_t             in_msg,
  // messages to the network
  output logic             out_valid,
  input  logic             out_ready,
  output msg_t             out_msg,
  // program load, broadcast by the host
  input  logic             imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_waddr,
  input  logic [31:0]      imem_wdata,
  output perf_t            perf
);
  // one 8-word operand slot per EventQ entry and per deferred event
  localparam int unsigned OB_DEPTH = 2 * EVQ_DEPTH * MAX_OPS;
  localparam int unsigned OBW      = $clog2(OB_DEPTH);
  localparam int unsigned TW  = $clog2(NTHREADS);
  localparam int unsigned SAW = $clog2(SPD_WORDS);
  localparam int unsigned PW  = $clog2(IMEM_DEPTH);

  // ---------------------------------------------------------------- arrival
  evq_entry_t evq_in, evq_head;
  logic       evq_push_ready, evq_valid, evq_pop;
  logic [OBW-1:0] ob_wbase;
  logic [OBW:0]   ob_space;
  logic [3:0] in_nwr;

  assign in_nwr   = (in_msg.kind == MSG_SPD_RD) ? 4'd0 : in_msg.nops;
  assign in_ready = evq_push_ready && (ob_space >= (OBW+1)'(in_nwr));
  always_comb begin
    evq_in        = '0;
    evq_in.kind   = in_msg.kind;
    evq_in.evw    = in_msg.evw;
    evq_in.cont   = in_msg.cont;
    evq_in.addr   = in_msg.addr;
    evq_in.nops   = in_msg.nops;
    evq_in.opbase = OPB_W'(ob_wbase);
  end

  event_queue #(.DEPTH(EVQ_DEPTH)) u_evq (
    .clk, .rst_n,
    .push_valid(in_valid && in_ready), .push_ready(evq_push_ready), .push_data(evq_in),
    .pop_valid(evq_valid), .pop_ready(evq_pop), .pop_data(evq_head), .count()
  );

  logic       ob_free_en;
  logic [3:0] ob_free_n;
  logic [2:0] ob_ia, ob_ib;
  word_t      ob_da, ob_db;
  evq_entry_t cur;

  operand_buffer #(.DEPTH(OB_DEPTH)) u_ob (
    .clk, .rst_n,
    .wr_en(in_valid && in_ready), .wr_n(in_nwr), .wr_data(in_msg.data),
    .wr_base(ob_wbase), .space(ob_space),
    .free_en(ob_free_en), .free_base(OBW'(cur.opbase)), .free_n(ob_free_n),
    .rd_base(OBW'(cur.opbase)), .rd_idx(ob_ia), .rd_data(ob_da), .rd2_idx(ob_ib), .rd2_data(ob_db)
  );

  // ---------------------------------------------------------------- threads
  logic          tt_alloc_ok, tt_act, tt_yield, tt_term;
  logic [TW-1:0] tt_alloc_tid, tt_act_tid, tid;

  thread_table #(.NTHREADS(NTHREADS)) u_tt (
    .clk, .rst_n, .alloc_ok(tt_alloc_ok), .alloc_tid(tt_alloc_tid),
    .act_en(tt_act), .act_tid(tt_act_tid), .yield_en(tt_yield), .term_en(tt_term),
    .cur_tid(tid), .free_count(), .waiting()
  );

  logic [4:0] rf_ra, rf_rb, rf_wa;
  word_t      rf_da, rf_db, rf_wd;
  logic       rf_we;

  register_contexts #(.NTHREADS(NTHREADS)) u_rf (
    .clk, .rtid(tid), .ra(rf_ra), .da(rf_da), .rb(rf_rb), .db(rf_db),
    .we(rf_we), .wtid(tid), .wa(rf_wa), .wd(rf_wd)
  );

  logic           sp_en, sp_we;
  logic [SAW-1:0] sp_addr;
  word_t          sp_wdata, sp_rdata;

  scratchpad_bank #(.WORDS(SPD_WORDS)) u_spd (
    .clk, .en(sp_en), .we(sp_we), .addr(sp_addr), .wdata(sp_wdata), .rdata(sp_rdata)
  );

  logic [PW-1:0] pc;
  logic [31:0]   instr;
  imem #(.DEPTH(IMEM_DEPTH)) u_imem (
    .clk, .we(imem_we), .waddr(imem_waddr), .wdata(imem_wdata), .raddr(pc), .rdata(instr)
  );

  logic no_valid, no_ready;
  msg_t no_msg;
  net_if #(.DEPTH(NETQ_DEPTH)) u_nif (
    .clk, .rst_n, .in_valid(no_valid), .in_ready(no_ready), .in_msg(no_msg),
    .out_valid, .out_ready, .out_msg
  );

  // ---------------------------------------------------------------- core
  typedef enum logic [3:0] {
    S_IDLE, S_RUN, S_LD, S_CSWP, S_BCPY_RD, S_BCPY_WR, S_BCPYOL,
    S_GATH, S_GATH_SPD, S_SEND, S_HWR, S_HRD, S_HRD_CAP
  } state_e;
  typedef enum logic [1:0] {G_REG, G_SPD} gsrc_e;

  state_e     state;
  state_e     ret_state;      // where S_SEND returns to
  msg_t       msg;            // message being assembled
  logic [12:0] k, cnt;        // word counter and length of multi-word ops
  word_t      ptr_a, ptr_b;   // byte addresses of multi-word ops
  logic [4:0] gbase;          // first register of a register gather
  gsrc_e      gsrc;
  logic [4:0] cs_rc;

  // instruction fields
  opcode_e     op;
  logic [4:0]  fa, fb, fc;
  logic [15:0] imm;
  word_t       simm;
  logic [3:0]  nw;
  logic [12:0] lbl;
  assign op   = opcode_e'(instr[31:26]);
  assign fa   = instr[25:21];
  assign fb   = instr[20:16];
  assign fc   = instr[15:11];
  assign imm  = instr[15:0];
  assign simm = {{48{imm[15]}}, imm};
  assign nw   = {1'b0, imm[15:13]} + 4'd1;
  assign lbl  = imm[12:0];

  // Register read ports: A always reads fa; B reads fb, or the register
  // being gathered, or rc for the second cycle of cswp.
  logic [4:0] rb_idx;
  always_comb begin
    rb_idx = fb;
    if (state == S_GATH || state == S_BCPYOL) rb_idx = gbase + 5'(k);
    else if (state == S_CSWP)                 rb_idx = cs_rc;
    else if (state == S_HWR)                  rb_idx = 5'd8 + 5'(k);
  end
  assign rf_ra = fa;
  assign rf_rb = rb_idx;
  assign ob_ia = fa[2:0];
  assign ob_ib = rb_idx[2:0];

  function automatic word_t xreg(input logic [4:0] r, input word_t rf_v, input word_t ob_v,
                                 input evq_entry_t e, input logic [LID_W-1:0] lid,
                                 input logic [TW-1:0] t);
    if (r >= 5'd16 || r == 5'd6 || r == 5'd7) return rf_v;
    if (r >= 5'd8) return ob_v;
    case (r)
      5'd1:    return e.evw;
      5'd2:    return e.cont;
      5'd3:    return e.addr;
      5'd4:    return word_t'(lid);
      5'd5:    return word_t'(t);
      default: return '0;
    endcase
  endfunction

  word_t va, vb;
  assign va = xreg(fa,     rf_da, ob_da, cur, lane_id, tid);
  assign vb = xreg(rb_idx, rf_db, ob_db, cur, lane_id, tid);

  function automatic logic [SAW-1:0] widx(input word_t byte_addr);
    return byte_addr[SAW+2:3];
  endfunction

  word_t cont_self;
  assign cont_self = mk_ev(lane_id, TID_W'(tid), LBL_W'(lbl));

  // Header of a send-class instruction, built in the decode cycle.
  msg_t hdr;
  always_comb begin
    hdr      = '0;
    hdr.cont = cont_self;
    hdr.nops = nw;
    case (op)
      OP_SENDM: begin hdr.kind = MSG_DRAM_RD; hdr.addr = va; end
      OP_SENDMR, OP_SENDMOPS: begin hdr.kind = MSG_DRAM_WR; hdr.addr = va; end
      default: begin
        hdr.kind = MSG_EVENT;
        hdr.evw  = {va[63:28], nw, va[23:0]};
        hdr.dst  = ev_lane(va);
      end
    endcase
  end

  // A first event that finds every context taken moves to the deferred
  // queue, so that the events behind it (which may be the ones that free a
  // context) can run. Deferred events are dispatched first, in order, as
  // soon as a context is free.
  evq_entry_t dfr;
  logic       dfr_valid, dfq_push_ready, dfq_pop;
  wire head_new   = (ev_tid(evq_head.evw) == TID_NEW);
  wire dfr_go     = dfr_valid && tt_alloc_ok;
  wire head_defer = evq_valid && evq_head.kind == MSG_EVENT && head_new && !tt_alloc_ok;

  assign dfq_pop = (state == S_IDLE) && dfr_go;
  event_queue #(.DEPTH(EVQ_DEPTH)) u_dfq (
    .clk, .rst_n,
    .push_valid((state == S_IDLE) && !dfr_go && head_defer), .push_ready(dfq_push_ready),
    .push_data(evq_head),
    .pop_valid(dfr_valid), .pop_ready(dfq_pop), .pop_data(dfr), .count()
  );

  wire [3:0] cur_nfree = (cur.kind == MSG_SPD_RD) ? 4'd0 : cur.nops;

  logic [31:0] c_events, c_new, c_yield, c_yieldt, c_stall, c_dram, c_msgs, c_busy;
  logic        i_event, i_new, i_stall, i_dram, i_msg;

  always_comb begin
    evq_pop    = 1'b0;
    tt_act     = 1'b0;
    tt_act_tid = TW'(ev_tid(evq_head.evw));
    tt_yield   = 1'b0;
    tt_term    = 1'b0;
    ob_free_en = 1'b0;
    ob_free_n  = cur_nfree;
    rf_we      = 1'b0;
    rf_wa      = fb;
    rf_wd      = '0;
    sp_en      = 1'b0;
    sp_we      = 1'b0;
    sp_addr    = '0;
    sp_wdata   = '0;
    no_valid   = 1'b0;
    no_msg     = msg;
    i_event = 1'b0; i_new = 1'b0; i_stall = 1'b0; i_dram = 1'b0; i_msg = 1'b0;
    unique case (state)
      S_IDLE: begin
        i_stall = (dfr_valid || head_defer) && !tt_alloc_ok;
        if (dfr_go) begin
          tt_act = 1'b1; tt_act_tid = tt_alloc_tid; i_event = 1'b1; i_new = 1'b1;
        end else if (evq_valid) begin
          if (evq_head.kind != MSG_EVENT) evq_pop = 1'b1;
          else if (head_defer) evq_pop = dfq_push_ready;   // move it aside
          else begin
            evq_pop = 1'b1;
            tt_act  = 1'b1;
            i_event = 1'b1;
            if (head_new) begin tt_act_tid = tt_alloc_tid; i_new = 1'b1; end
          end
        end
      end
      S_RUN: unique case (op)
        OP_ADD:  begin rf_we = 1'b1; rf_wa = fc; rf_wd = va + vb; end
        OP_SUB:  begin rf_we = 1'b1; rf_wa = fc; rf_wd = va - vb; end
        OP_AND:  begin rf_we = 1'b1; rf_wa = fc; rf_wd = va & vb; end
        OP_OR:   begin rf_we = 1'b1; rf_wa = fc; rf_wd = va | vb; end
        OP_ADDI: begin rf_we = 1'b1; rf_wd = va + simm; end
        OP_SUBI: begin rf_we = 1'b1; rf_wd = va - simm; end
        OP_EV:   begin rf_we = 1'b1; rf_wa = fc;
                       rf_wd = mk_ev(LID_W'(va), TID_W'(vb), LBL_W'(imm[10:0])); end
        OP_EVI:  begin rf_we = 1'b1; rf_wd = mk_ev(LID_W'(va), TID_NEW, imm); end
        OP_EVII: begin rf_we = 1'b1; rf_wd = mk_ev(lane_id, TID_NEW, imm); end
        OP_MOVLR, OP_CSWP: begin
          sp_en = 1'b1; sp_addr = widx(op == OP_CSWP ? va : va + simm);
        end
        OP_MOVRL: begin sp_en = 1'b1; sp_we = 1'b1; sp_addr = widx(vb + simm); sp_wdata = va; end
        OP_SENDM: begin
          no_valid = 1'b1; no_msg = hdr; i_dram = no_ready;
        end
        OP_YIELD, OP_YIELDT: begin
          ob_free_en = 1'b1;
          tt_yield   = (op == OP_YIELD);
          tt_term    = (op == OP_YIELDT);
        end
        default: ;
      endcase
      S_LD: begin rf_we = 1'b1; rf_wa = cs_rc; rf_wd = sp_rdata; end
      S_CSWP: begin
        rf_we = 1'b1; rf_wa = cs_rc; rf_wd = sp_rdata;
        if (sp_rdata == ptr_b) begin
          sp_en = 1'b1; sp_we = 1'b1; sp_addr = widx(ptr_a); sp_wdata = vb;
        end
      end
      S_BCPY_RD: begin sp_en = 1'b1; sp_addr = widx(ptr_a + word_t'({k, 3'b000})); end
      S_BCPY_WR: begin
        sp_en = 1'b1; sp_we = 1'b1; sp_addr = widx(ptr_b + word_t'({k, 3'b000})); sp_wdata = sp_rdata;
      end
      S_BCPYOL: begin
        sp_en = 1'b1; sp_we = 1'b1; sp_addr = widx(ptr_b + word_t'({k, 3'b000})); sp_wdata = vb;
      end
      S_GATH: if (gsrc == G_SPD) begin sp_en = 1'b1; sp_addr = widx(ptr_b + word_t'({k, 3'b000})); end
      S_SEND: begin
        no_valid = 1'b1;
        i_dram   = no_ready && (msg.kind == MSG_DRAM_RD || msg.kind == MSG_DRAM_WR);
        i_msg    = no_ready && (msg.kind == MSG_EVENT);
        if (no_ready && ret_state == S_IDLE) ob_free_en = 1'b1;
      end
      S_HWR: begin
        if (cur.nops != 0) begin
          sp_en = 1'b1; sp_we = 1'b1; sp_addr = widx(cur.addr + word_t'({k, 3'b000})); sp_wdata = ob_db;
        end
        if (cur.nops == 0 || k == 13'(cur.nops) - 13'd1) ob_free_en = 1'b1;
      end
      S_HRD: begin sp_en = 1'b1; sp_addr = widx(cur.addr + word_t'({k, 3'b000})); end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ret_state <= S_IDLE;
      cur       <= '0;
      tid       <= '0;
      pc        <= '0;
      msg       <= '0;
      k         <= '0;
      cnt       <= '0;
      ptr_a     <= '0;
      ptr_b     <= '0;
      gbase     <= '0;
      gsrc      <= G_REG;
      cs_rc     <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (dfr_go) begin
          cur       <= dfr;
          state     <= S_RUN;
          tid       <= tt_act_tid;
          pc        <= PW'(ev_label(dfr.evw));
        end else if (evq_pop && !head_defer) begin
          cur <= evq_head;
          k   <= '0;
          unique case (evq_head.kind)
            MSG_SPD_WR: state <= S_HWR;
            MSG_SPD_RD: begin
              state     <= (evq_head.nops == 0) ? S_SEND : S_HRD;
              ret_state <= S_IDLE;
              msg       <= '0;
              msg.kind  <= MSG_EVENT;
              msg.dst   <= ev_lane(evq_head.cont);
              msg.evw   <= {evq_head.cont[63:28], evq_head.nops, evq_head.cont[23:0]};
              msg.addr  <= evq_head.addr;
              msg.nops  <= evq_head.nops;
            end
            default: begin
              state <= S_RUN;
              tid   <= tt_act_tid;
              pc    <= PW'(ev_label(evq_head.evw));
            end
          endcase
        end
        S_RUN: begin
          pc <= pc + 1'b1;
          k  <= '0;
          unique case (op)
            OP_BEQ: if (va == vb) pc <= PW'(imm);
            OP_BNE: if (va != vb) pc <= PW'(imm);
            OP_BLT: if ($signed(va) <  $signed(vb)) pc <= PW'(imm);
            OP_BLE: if ($signed(va) <= $signed(vb)) pc <= PW'(imm);
            OP_BGT: if ($signed(va) >  $signed(vb)) pc <= PW'(imm);
            OP_MOVLR: begin state <= S_LD; cs_rc <= fb; end
            OP_CSWP: begin state <= S_CSWP; ptr_a <= va; ptr_b <= vb; cs_rc <= fc; end
            OP_BCPY, OP_BCPYOL: begin
              ptr_a <= va; ptr_b <= vb; cnt <= imm[15:3]; gbase <= fa;
              if (imm[15:3] != 0) state <= (op == OP_BCPY) ? S_BCPY_RD : S_BCPYOL;
            end
            OP_SENDM: if (!no_ready) begin
              msg <= hdr; state <= S_SEND; ret_state <= S_RUN;
            end
            OP_SEND, OP_SENDR, OP_SENDOPS, OP_SENDMR, OP_SENDMOPS: begin
              msg       <= hdr;
              cnt       <= 13'(nw);
              ret_state <= S_RUN;
              ptr_b     <= vb;
              gsrc      <= (op == OP_SEND) ? G_SPD : G_REG;
              gbase     <= (op == OP_SENDOPS || op == OP_SENDMOPS) ? 5'd8 : fb;
              state     <= S_GATH;
            end
            OP_YIELD, OP_YIELDT: state <= S_IDLE;
            default: ;
          endcase
        end
        S_LD:   state <= S_RUN;
        S_CSWP: state <= S_RUN;
        S_BCPY_RD: state <= S_BCPY_WR;
        S_BCPY_WR: begin
          k     <= k + 1'b1;
          state <= (k + 1'b1 == cnt) ? S_RUN : S_BCPY_RD;
        end
        S_BCPYOL: begin
          k <= k + 1'b1;
          if (k + 1'b1 == cnt) state <= S_RUN;
        end
        S_GATH: begin
          if (gsrc == G_SPD) state <= S_GATH_SPD;
          else begin
            msg.data[k[2:0]] <= vb;
            k <= k + 1'b1;
            if (k + 1'b1 == cnt) state <= S_SEND;
          end
        end
        S_GATH_SPD: begin
          msg.data[k[2:0]] <= sp_rdata;
          k     <= k + 1'b1;
          state <= (k + 1'b1 == cnt) ? S_SEND : S_GATH;
        end
        S_SEND: if (no_ready) state <= ret_state;
        S_HWR: begin
          k <= k + 1'b1;
          if (cur.nops == 0 || k == 13'(cur.nops) - 13'd1) state <= S_IDLE;
        end
        S_HRD: state <= S_HRD_CAP;
        S_HRD_CAP: begin
          msg.data[k[2:0]] <= sp_rdata;
          k     <= k + 1'b1;
          state <= (k + 1'b1 == 13'(cur.nops)) ? S_SEND : S_HRD;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- counters
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {c_events, c_new, c_yield, c_yieldt, c_stall, c_dram, c_msgs, c_busy} <= '0;
    end else begin
      c_events <= c_events + 32'(i_event);
      c_new    <= c_new    + 32'(i_new);
      c_yield  <= c_yield  + 32'(tt_yield);
      c_yieldt <= c_yieldt + 32'(tt_term);
      c_stall  <= c_stall  + 32'(i_stall);
      c_dram   <= c_dram   + 32'(i_dram);
      c_msgs   <= c_msgs   + 32'(i_msg);
      c_busy   <= c_busy   + 32'(state != S_IDLE);
    end
  end
  assign perf = '{events: c_events, threads_new: c_new, yields: c_yield, yieldts: c_yieldt,
                  ctx_stalls: c_stall, dram_reqs: c_dram, lane_msgs: c_msgs, busy: c_busy};

  // A message handed to the network never has more than eight words.
  assert property (@(posedge clk) disable iff (!rst_n) no_valid |-> no_msg.nops <= 4'd8);
endmodule
