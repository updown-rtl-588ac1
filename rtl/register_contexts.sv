// register_contexts: register storage of all thread contexts of a lane.
//
// Holds, per thread, the 16 general purpose registers X16..X31 and the two
// writable special registers X6 and X7 (the other specials are generated by
// the core from the running event and are not stored). Two combinational
// read ports and one write port address a (thread, register) pair; register
// indices outside the stored set read as zero and ignore writes.
//
// The count of registers per thread follows the paper (16 general, 8
// special); which specials are stored and the port count are this design's
// choices.
module register_contexts
  import updown_pkg::*;
#(
  parameter int unsigned NTHREADS = 128,
  parameter int unsigned NGPR     = 16,
  parameter int unsigned NSPR     = 8,
  localparam int unsigned TW = $clog2(NTHREADS)
) (
  input  logic          clk,
  input  logic [TW-1:0] rtid,
  input  logic [4:0]    ra,
  output word_t         da,
  input  logic [4:0]    rb,
  output word_t         db,
  input  logic          we,
  input  logic [TW-1:0] wtid,
  input  logic [4:0]    wa,
  input  word_t         wd
);

  // Of the NSPR special registers only X6 and X7 are stored here.
  initial assert (NSPR >= 2 && NSPR <= 8) else $error("NSPR must be 2..8");
  // Index 0..NGPR-1 = X16..X31, NGPR..NGPR+1 = X6, X7.
  localparam int unsigned NREG = NGPR + 2;
  localparam int unsigned RW   = $clog2(NREG);
  word_t rf [NTHREADS * NREG];

  function automatic logic map(input logic [4:0] r, output logic [RW-1:0] idx);
    if (r >= 5'd16) begin idx = RW'(r - 5'd16); return 1'b1; end
    if (r == 5'd6 || r == 5'd7) begin idx = RW'(NGPR) + RW'(r == 5'd7); return 1'b1; end
    idx = '0;
    return 1'b0;
  endfunction

  logic          va, vb, vw;
  logic [RW-1:0] ia, ib, iw;
  always_comb begin
    va = map(ra, ia);
    vb = map(rb, ib);
    vw = map(wa, iw);
    da = va ? rf[int'(rtid) * NREG + int'(ia)] : '0;
    db = vb ? rf[int'(rtid) * NREG + int'(ib)] : '0;
  end

  always_ff @(posedge clk)
    if (we && vw) rf[int'(wtid) * NREG + int'(iw)] <= wd;
endmodule
