// tb_stream_fifo: random pushes and pops against a queue model; checks the
// head word, full/almost-full/empty flags and clear.
module tb_stream_fifo;
  localparam int DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, push = 1'b0, pop = 1'b0, full, afull, empty;
  logic [15:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [15:0] q [$];

  stream_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_full = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty flag");
      check(full == (q.size() == DEPTH), "full flag");
      check(afull == (q.size() >= DEPTH - 1), "afull flag");
      if (q.size() > 0) check(dout == q[0], "head word");
      if (full) n_full++;
      push = (i % 500 < 250) ? ($urandom % 4 != 0) : ($urandom % 4 == 0);
      push = push && !full;
      pop  = ($urandom % 2 == 0) && !empty;
      din  = 16'($urandom);
      @(posedge clk);
      #1;
      if (pop)  void'(q.pop_front());
      if (push) q.push_back(din);
    end
    @(negedge clk); push = 1'b0; pop = 1'b0; clear = 1'b1;
    @(negedge clk); clear = 1'b0; q.delete();
    check(empty, "clear empties");
    check(n_full > 0, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
