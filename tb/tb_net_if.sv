// tb_net_if: random traffic with random back-pressure through the lane's
// network interface; checks message order, that nothing is lost or
// duplicated, and that it accepts exactly DEPTH messages when blocked.
//
// The paper names the network interface; its queue depth and handshake
// are this design's choices.
module tb_net_if;
  import updown_pkg::*;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  msg_t in_msg, out_msg;
  msg_t model[$];
  int checks = 0, failures = 0, sent = 0, got = 0;

  net_if #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  function automatic msg_t rnd();
    msg_t m = '0;
    m.kind = MSG_EVENT; m.dst = 16'($urandom); m.evw = {$urandom, $urandom};
    m.nops = 4'($urandom_range(0, 8));
    for (int i = 0; i < 8; i++) m.data[i] = {$urandom, $urandom};
    return m;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc;
    in_valid = 0; out_ready = 0; in_msg = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    // blocked output: exactly DEPTH accepted
    acc = 0;
    for (int i = 0; i < DEPTH + 3; i++) begin
      in_msg = rnd(); in_valid = 1; #1;
      if (in_ready) begin acc++; model.push_back(in_msg); end
      @(negedge clk);
    end
    in_valid = 0;
    chk(acc == DEPTH, "accepts DEPTH messages while blocked");
    for (int c = 0; c < 3000; c++) begin
      in_valid = $urandom_range(0, 1); in_msg = rnd(); out_ready = $urandom_range(0, 1); #1;
      if (out_valid && out_ready) begin
        chk(model.size() > 0 && out_msg == model[0], "message order");
        void'(model.pop_front()); got++;
      end
      if (in_valid && in_ready) begin model.push_back(in_msg); sent++; end
      @(negedge clk);
    end
    chk(got > 100 && sent > 100, "traffic flowed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
