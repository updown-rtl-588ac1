// operand_buffer: holds the operand words of queued events.
//
// The buffer is cut into slots of 8 words, one per event, so that an event
// with any operand count 1..8 fits a slot. When a message with operands
// arrives, its words are written into the lowest free slot in one cycle
// and the slot's first word address (wr_base) travels with the event
// through the EventQ. While the event's handler runs, its operands are read
// in place as registers X8..X15 through two combinational read ports
// (rd_base + index), so no instruction is spent copying a message into
// registers. When the invocation ends the lane releases the slot (free_en,
// free_base, free_n). A message without operands takes no slot, and a
// release with free_n = 0 frees nothing.
//
// Slots are released in any order. This matters because a first event that
// has to wait for a thread context is set aside and finishes long after
// events that arrived behind it; a circular buffer would stay blocked
// behind its words, and once full would refuse the very DRAM replies that
// free contexts. With one slot for every EventQ entry and every deferred
// event the buffer can never be what blocks an arrival.
//
// space reports 8 words per free slot. Timing: a write or a release takes
// effect at the next clock edge; reads are combinational.
//
// The paper gives the buffer's purpose (operands mapped into the register
// namespace); its size and slot organisation are this design's choices.
module operand_buffer
  import updown_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic [3:0]               wr_n,
  input  word_t [MAX_OPS-1:0]      wr_data,
  output logic [$clog2(DEPTH)-1:0] wr_base,
  output logic [$clog2(DEPTH):0]   space,
  input  logic                     free_en,
  input  logic [$clog2(DEPTH)-1:0] free_base,
  input  logic [3:0]               free_n,
  input  logic [$clog2(DEPTH)-1:0] rd_base,
  input  logic [2:0]               rd_idx,
  output word_t                    rd_data,
  input  logic [2:0]               rd2_idx,
  output word_t                    rd2_data
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned NS = DEPTH / MAX_OPS;     // slots
  localparam int unsigned SW = $clog2(NS);
  word_t mem [DEPTH];
  logic [NS-1:0] busy;
  logic [SW-1:0] wslot;
  logic [SW:0]   nfree;

  always_comb begin
    wslot = '0;
    for (int s = NS - 1; s >= 0; s--) if (!busy[s]) wslot = SW'(s);
    nfree = '0;
    for (int s = 0; s < NS; s++) nfree += (SW+1)'(!busy[s]);
  end

  assign wr_base  = {wslot, 3'b000};
  assign space    = (AW+1)'({nfree, 3'b000});
  assign rd_data  = mem[{rd_base[AW-1:3], rd_idx}];
  assign rd2_data = mem[{rd_base[AW-1:3], rd2_idx}];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= '0;
    end else begin
      if (free_en && free_n != 0) busy[free_base[AW-1:3]] <= 1'b0;
      if (wr_en && wr_n != 0)     busy[wslot] <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int i = 0; i < MAX_OPS; i++)
        if (i < int'(wr_n)) mem[{wslot, 3'(i)}] <= wr_data[i];
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> ((AW+1)'(wr_n) <= space));
  assert property (@(posedge clk) disable iff (!rst_n) (free_en && free_n != 0) |-> busy[free_base[AW-1:3]]);
endmodule
