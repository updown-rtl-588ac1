// tb_operand_buffer: appends messages of 0..8 operand words, reads each
// event's operands back by base pointer and index as the lane does, and
// releases events in random order. A slot model predicts which slot every
// write takes (the lowest free one) and the free-space count; a message
// without operands must take no slot. A final directed case releases the
// younger of two events first and checks that its slot is reused at once.
//
// Operands read in place as X8..X15 follow the paper; depth, the slot
// organisation, the two read ports and out-of-order release are this
// design's choices.
module tb_operand_buffer;
  import updown_pkg::*;
  localparam int DEPTH = 64, NS = DEPTH / 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, free_en;
  logic [3:0] wr_n, free_n;
  word_t [MAX_OPS-1:0] wr_data;
  logic [5:0] wr_base, rd_base, free_base;
  logic [6:0] space;
  logic [2:0] rd_idx, rd2_idx;
  word_t rd_data, rd2_data;
  int checks = 0, failures = 0;

  operand_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  typedef struct { int base; int n; word_t w[8]; } ev_t;
  ev_t q[$];
  bit busy [NS];

  function automatic int lowest_free();
    for (int s = 0; s < NS; s++) if (!busy[s]) return s;
    return -1;
  endfunction
  function automatic int nfree();
    int c;
    c = 0;
    for (int s = 0; s < NS; s++) if (!busy[s]) c++;
    return c;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; free_en = 0; free_base = 0; wr_n = 0; free_n = 0; wr_data = '0; rd_base = 0; rd_idx = 0; rd2_idx = 0;
    for (int s = 0; s < NS; s++) busy[s] = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    chk(space == DEPTH, "empty buffer has DEPTH space");
    for (int it = 0; it < 600; it++) begin
      int n, k;
      ev_t e;
      @(negedge clk);
      n = $urandom_range(0, 8);
      if ((n == 0 || lowest_free() >= 0) && ($urandom_range(0, 2) != 0 || q.size() == 0)) begin
        e.n = n; e.base = int'(wr_base);
        if (n > 0) begin
          chk(e.base == 8 * lowest_free(), "write takes the lowest free slot");
          busy[e.base / 8] = 1;
        end
        for (int i = 0; i < 8; i++) begin e.w[i] = {$urandom, $urandom}; wr_data[i] = e.w[i]; end
        wr_n = 4'(n); wr_en = 1; @(negedge clk); wr_en = 0;
        q.push_back(e);
      end else begin
        k = $urandom_range(0, q.size() - 1);
        e = q[k]; q.delete(k);
        rd_base = 6'(e.base);
        for (int i = 0; i < e.n; i++) begin
          rd_idx = 3'(i); rd2_idx = 3'(e.n - 1 - i); #1;
          chk(rd_data == e.w[i], "operand read port A");
          chk(rd2_data == e.w[e.n - 1 - i], "operand read port B");
        end
        @(negedge clk);
        free_base = 6'(e.base); free_n = 4'(e.n); free_en = 1; @(negedge clk); free_en = 0;
        if (e.n > 0) busy[e.base / 8] = 0;
      end
      @(negedge clk);
      chk(int'(space) == 8 * nfree(), "space tracks free slots");
    end
    while (q.size() > 0) begin
      ev_t e;
      e = q.pop_front();
      @(negedge clk); free_base = 6'(e.base); free_n = 4'(e.n); free_en = 1;
      @(negedge clk); free_en = 0;
    end
    repeat (2) @(negedge clk);
    chk(space == DEPTH, "empty again");
    // younger released first: its slot is free at once and reused
    for (int j = 0; j < 2; j++) begin
      @(negedge clk); wr_n = 4'd6; wr_en = 1; @(negedge clk); wr_en = 0;
    end
    chk(space == DEPTH - 16, "two events take two slots");
    @(negedge clk); free_base = 6'd8; free_n = 4'd6; free_en = 1;
    @(negedge clk); free_en = 0;
    chk(space == DEPTH - 8 && wr_base == 6'd8, "younger release frees its slot alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
