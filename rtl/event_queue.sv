// event_queue: the lane's hardware EventQ.
//
// Every message that arrives at a lane becomes one entry here: its event
// word, continuation word, response address, and where its operands were
// placed in the operand buffer. The scheduler takes entries in arrival
// order. It is a plain circular FIFO with valid/ready on both sides; a push
// and a pop may happen in the same cycle. pop_data shows the head entry
// combinationally while pop_valid is high.
//
// The paper names the EventQ and says events are queued in hardware with no
// instructions spent on queue management; the depth and the handshake are
// this design's choices.
module event_queue
  import updown_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push_valid,
  output logic        push_ready,
  input  evq_entry_t  push_data,
  output logic        pop_valid,
  input  logic        pop_ready,
  output evq_entry_t  pop_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  evq_entry_t mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign push_ready = (count < DEPTH[AW:0]);
  assign pop_valid  = (count != '0);
  assign pop_data   = mem[rd_ptr];

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
      count <= count + {{AW{1'b0}}, do_push} - {{AW{1'b0}}, do_pop};
    end
  end

  always_ff @(posedge clk) if (do_push) mem[wr_ptr] <= push_data;

  // A full queue never accepts and an empty one never delivers.
  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
endmodule
