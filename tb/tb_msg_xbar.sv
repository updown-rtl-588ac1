// tb_msg_xbar: random messages from 5 inputs to 3 outputs with random
// back-pressure. Checks that every message reaches the output it asked for,
// in order per (input, output) pair, none lost or duplicated, and that two
// inputs competing for one output are granted in strict alternation.
//
// The paper only says that all lanes, accelerators and stacks can reach
// one another; the crossbar and its round-robin fairness are this design's.
module tb_msg_xbar;
  import updown_pkg::*;
  localparam int NI = 5, NO = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NI-1:0] in_valid, in_ready;
  logic [NO-1:0] out_valid, out_ready;
  msg_t in_msg [NI];
  msg_t out_msg [NO];
  logic [1:0] in_dst [NI];
  int checks = 0, failures = 0;
  int seq [NI][NO];
  int exp_seq [NI][NO];
  int delivered = 0;

  msg_xbar #(.NI(NI), .NO(NO)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // message tag: evw = {input, output, sequence}
  task automatic new_msg(int i);
    int o = $urandom_range(0, NO - 1);
    in_dst[i] = 2'(o);
    in_msg[i] = '0;
    in_msg[i].evw = {16'(i), 16'(o), 32'(seq[i][o])};
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last_g;
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < NI; i++) begin
      in_msg[i] = '0; in_dst[i] = 0;
      for (int o = 0; o < NO; o++) begin seq[i][o] = 0; exp_seq[i][o] = 0; end
    end
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < NI; i++) new_msg(i);
    for (int c = 0; c < 4000; c++) begin
      for (int i = 0; i < NI; i++) if (!in_valid[i]) in_valid[i] = ($urandom_range(0, 2) != 0);
      out_ready = NO'($urandom);
      #1;
      for (int o = 0; o < NO; o++) if (out_valid[o] && out_ready[o]) begin
        automatic int si = int'(out_msg[o].evw[63:48]);
        automatic int so = int'(out_msg[o].evw[47:32]);
        automatic int sq = int'(out_msg[o].evw[31:0]);
        chk(so == o, "message on requested output");
        chk(sq == exp_seq[si][o], "in order, no loss or duplicate");
        exp_seq[si][o] = sq + 1; delivered++;
      end
      begin
        automatic logic [NI-1:0] acc = in_valid & in_ready;
        @(negedge clk);
        for (int i = 0; i < NI; i++) if (acc[i]) begin
          seq[i][int'(in_dst[i])]++;
          new_msg(i);
          in_valid[i] = 1'b0;
        end
      end
    end
    // fairness: inputs 1 and 3 both hold requests for output 0
    in_valid = '0; out_ready = '1;
    in_valid[1] = 1; in_valid[3] = 1; in_dst[1] = 0; in_dst[3] = 0;
    last_g = -1;
    for (int c = 0; c < 10; c++) begin
      #1;
      chk(in_ready[1] ^ in_ready[3], "one of two competing inputs granted");
      if (last_g >= 0) chk((in_ready[1] ? 1 : 3) != last_g, "round-robin alternation");
      last_g = in_ready[1] ? 1 : 3;
      @(negedge clk);
    end
    chk(delivered > 500, "traffic delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
