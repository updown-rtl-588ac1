// updown_asm_pkg: instruction encoders used by the testbenches to build
// UpDown programs, one function per instruction format of updown_pkg.
//
// The instruction names follow the paper; the encoding and the example
// kernel are this design's own.
package updown_asm_pkg;
  import updown_pkg::*;
  // rc = ra op rb
  function automatic logic [31:0] i_r(opcode_e op, int ra, int rb, int rc);
    return {op, 5'(ra), 5'(rb), 5'(rc), 11'd0};
  endfunction
  // rb = ra op imm, branches (ra, rb, target), scratchpad (ra, rb, offset)
  function automatic logic [31:0] i_i(opcode_e op, int ra, int rb, int imm);
    return {op, 5'(ra), 5'(rb), 16'(imm)};
  endfunction
  // sends: ra = event word / address, rb = data source, n words, reply label
  function automatic logic [31:0] i_s(opcode_e op, int ra, int rb, int n, int lbl);
    return {op, 5'(ra), 5'(rb), 3'(n - 1), 13'(lbl)};
  endfunction
  function automatic logic [31:0] i_yield();  return {OP_YIELD, 26'd0};  endfunction
  function automatic logic [31:0] i_yieldt(); return {OP_YIELDT, 26'd0}; endfunction

  // Gather-sum kernel used by the node testbenches. Labels:
  localparam int GS_START = 0, GS_MRET = 20, GS_MWAIT = 26,
                 GS_WSTART = 30, GS_WDATA = 40, GS_WACK = 50;
  // start(W, data_base, res_base, stride, mask) on the master thread:
  //   spawns W worker threads, worker i on lane (i*stride) & mask with
  //   operands (data_base + 64 i, res_base + 8 i), then collects their
  //   results and sends the total to the host (the start event's sender).
  // worker(data, res): reads 8 words from DRAM, adds them, writes the sum
  //   to DRAM at res, and after the write is acknowledged reports the sum
  //   to the master.
  function automatic logic [31:0] gs_prog(int a);
    case (a)
      0:  return i_i(OP_ADDI, 8, 16, 0);         // x16 = W
      1:  return i_i(OP_ADDI, 0, 17, 0);         // x17 = i
      2:  return i_i(OP_ADDI, 0, 18, 0);         // x18 = total
      3:  return i_i(OP_ADDI, 0, 19, 0);         // x19 = results received
      4:  return i_i(OP_ADDI, 2, 7, 0);          // x7  = host continuation
      5:  return i_i(OP_ADDI, 9, 24, 0);         // x24 = data pointer
      6:  return i_i(OP_ADDI, 10, 25, 0);        // x25 = result pointer
      7:  return i_i(OP_ADDI, 0, 22, 0);         // x22 = lane of worker i
      8:  return i_i(OP_EVI, 22, 23, GS_WSTART); // loop: x23 = new-thread event
      9:  return i_s(OP_SENDR, 23, 24, 2, GS_MRET);
      10: return i_i(OP_ADDI, 24, 24, 64);
      11: return i_i(OP_ADDI, 25, 25, 8);
      12: return i_r(OP_ADD, 22, 11, 22);
      13: return i_r(OP_AND, 22, 12, 22);
      14: return i_i(OP_ADDI, 17, 17, 1);
      15: return i_i(OP_BLT, 17, 16, 8);
      16: return i_yield();
      20: return i_r(OP_ADD, 18, 8, 18);         // mret(sum)
      21: return i_i(OP_ADDI, 19, 19, 1);
      22: return i_i(OP_BNE, 19, 16, GS_MWAIT);
      23: return i_s(OP_SENDR, 7, 18, 1, 0);
      24: return i_yieldt();
      26: return i_yield();
      30: return i_i(OP_ADDI, 2, 6, 0);          // wstart: x6 = master
      31: return i_i(OP_ADDI, 9, 20, 0);         // x20 = result address
      32: return i_s(OP_SENDM, 8, 0, 8, GS_WDATA);
      33: return i_yield();
      40: return i_r(OP_ADD, 8, 9, 16);          // wdata(x8..x15)
      41: return i_r(OP_ADD, 16, 10, 16);
      42: return i_r(OP_ADD, 16, 11, 16);
      43: return i_r(OP_ADD, 16, 12, 16);
      44: return i_r(OP_ADD, 16, 13, 16);
      45: return i_r(OP_ADD, 16, 14, 16);
      46: return i_r(OP_ADD, 16, 15, 16);
      47: return i_s(OP_SENDMR, 20, 16, 1, GS_WACK);
      48: return i_yield();
      50: return i_s(OP_SENDR, 6, 16, 1, 0);     // wack
      51: return i_yieldt();
      default: return i_yieldt();
    endcase
  endfunction
  localparam int GS_LEN = 52;
endpackage
