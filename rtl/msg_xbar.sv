// msg_xbar: message crossbar with round-robin arbitration per output.
//
// NI inputs each present a message and the index of the output it wants
// (in_dst). Every output grants one requesting input per cycle, rotating
// priority from the last input it served, and passes the message through
// combinationally; an input is told in_ready when its output grants it and
// is ready. The same block joins the 64 lanes of an accelerator and joins
// accelerators, host and HBM stacks in a node. The paper says every lane can
// message every other lane, accelerator and DRAM stack but does not describe
// the network; this crossbar is this design's choice.
module msg_xbar
  import updown_pkg::*;
#(
  parameter int unsigned NI = 4,
  parameter int unsigned NO = 4,
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1,
  localparam int unsigned OW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NI-1:0]       in_valid,
  output logic [NI-1:0]       in_ready,
  input  msg_t                in_msg [NI],
  input  logic [OW-1:0]       in_dst [NI],
  output logic [NO-1:0]       out_valid,
  input  logic [NO-1:0]       out_ready,
  output msg_t                out_msg [NO]
);
  logic [IW-1:0] last [NO];
  logic [IW-1:0] gnt  [NO];

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      out_valid[o] = 1'b0;
      gnt[o]       = '0;
      // Search the inputs starting after the last one served.
      for (int k = NI; k >= 1; k--) begin
        automatic int i = (int'(last[o]) + k) % NI;
        if (in_valid[i] && int'(in_dst[i]) == o) begin
          out_valid[o] = 1'b1;
          gnt[o]       = IW'(i);
        end
      end
      out_msg[o] = in_msg[gnt[o]];
    end
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < NO; o++)
      if (out_valid[o] && out_ready[o]) in_ready[gnt[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NO; o++) last[o] <= IW'(NI - 1);
    end else begin
      for (int o = 0; o < NO; o++)
        if (out_valid[o] && out_ready[o]) last[o] <= gnt[o];
    end
  end
endmodule
