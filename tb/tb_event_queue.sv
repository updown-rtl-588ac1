// tb_event_queue: fills, drains and interleaves the EventQ against a
// queue model, checking order, occupancy and the full/empty handshake.
//
// The EventQ itself is the paper's; depth 32 and the valid/ready handshake
// checked here are this design's choices.
module tb_event_queue;
  import updown_pkg::*;
  localparam int DEPTH = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push_valid, push_ready, pop_valid, pop_ready;
  evq_entry_t push_data, pop_data;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  evq_entry_t model[$];

  event_queue #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic evq_entry_t rnd();
    evq_entry_t e;
    e.kind = MSG_EVENT; e.evw = {$urandom, $urandom}; e.cont = {$urandom, $urandom};
    e.addr = {$urandom, $urandom}; e.nops = 4'($urandom_range(0, 8)); e.opbase = OPB_W'($urandom);
    return e;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!pop_valid && count == 0, "empty after reset");
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      push_data = rnd(); push_valid = 1;
      chk(push_ready, "ready while not full");
      model.push_back(push_data);
      @(negedge clk);
    end
    push_valid = 0;
    chk(count == DEPTH && !push_ready, "full after DEPTH pushes");
    // drain
    for (int i = 0; i < DEPTH; i++) begin
      chk(pop_valid && pop_data == model[0], "fifo order on drain");
      void'(model.pop_front());
      pop_ready = 1; @(negedge clk); pop_ready = 0;
    end
    chk(!pop_valid && count == 0, "empty after drain");
    // random traffic
    for (int c = 0; c < 2000; c++) begin
      push_valid = $urandom_range(0, 1);
      push_data  = rnd();
      pop_ready  = $urandom_range(0, 1);
      #1;
      if (pop_valid && pop_ready) begin
        chk(pop_data == model[0], "fifo order random");
        void'(model.pop_front());
      end
      if (push_valid && push_ready) model.push_back(push_data);
      @(negedge clk);
      chk(int'(count) == model.size(), "count matches model");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
