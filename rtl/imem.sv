// imem: instruction memory of one lane.
//
// Holds the event handlers. An event's label is the instruction address at
// which its handler starts. The host writes it through a broadcast port
// (we/waddr/wdata) before events are sent; the core reads the instruction at
// raddr combinationally. Where programs live is not described in the paper:
// a small per-lane memory is this design's choice.
module imem #(
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata
);
  logic [31:0] mem [DEPTH];
  assign rdata = mem[raddr];
  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;
endmodule
