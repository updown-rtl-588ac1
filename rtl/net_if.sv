// net_if: network interface of a lane.
//
// A small FIFO of complete messages between the lane core and the network.
// A send-class instruction hands over one whole message (up to eight
// operand words) in one cycle; the network drains one message per cycle when
// out_ready is high. The FIFO lets a thread issue several sends back to back
// while the network is busy, which is how one thread keeps many DRAM
// requests in flight. The paper only names this block; a DEPTH-entry FIFO is
// this design's choice.
module net_if
  import updown_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  msg_t in_msg,
  output logic out_valid,
  input  logic out_ready,
  output msg_t out_msg
);
  localparam int unsigned AW = $clog2(DEPTH);
  msg_t mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [AW:0]   count;

  assign in_ready  = (count < DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_msg   = mem[rd_ptr];
  wire do_in  = in_valid && in_ready;
  wire do_out = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_in)  wr_ptr <= wr_ptr + 1'b1;
      if (do_out) rd_ptr <= rd_ptr + 1'b1;
      count <= count + {{AW{1'b0}}, do_in} - {{AW{1'b0}}, do_out};
    end
  end
  always_ff @(posedge clk) if (do_in) mem[wr_ptr] <= in_msg;
endmodule
