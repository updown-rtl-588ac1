// scratchpad_bank: the 64 KB software-managed scratchpad of one lane.
//
// 8192 words of 64 bits behind a single port. A write stores wdata at addr
// on the clock edge; a read presents the word at addr on rdata one cycle
// after en (synchronous read, as an SRAM macro would). Programs and the host
// address it by word.
//
// The capacity is the paper's (64 KB per lane, 4 MB per accelerator); the
// single port, the read latency and word addressing are this design's
// choices. It is written as an array so a memory compiler can map it.
module scratchpad_bank
  import updown_pkg::*;
#(
  parameter int unsigned WORDS = 8192,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  word_t         wdata,
  output word_t         rdata
);
  word_t mem [WORDS];
  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
