// tb_visited_validator: random partial results with vertex ids drawn from a
// small range so repeats are common; b_v must be 0 exactly when the new vertex
// equals an earlier one. Random output stalls; one task per cycle when not
// stalled (checked by counting cycles).
module tb_visited_validator;
  import fast_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0, in_ready, out_valid, out_b, out_ready = 1;
  po_t in_data = '0;
  int checks = 0, failures = 0;
  bit exp_q [$];

  visited_validator dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic po_t rnd();
    po_t t;
    t.pos = qpos_t'($urandom % MAX_QV);
    for (int i = 0; i < MAX_QV; i++) begin t.p.vid[i] = vid_t'($urandom % 10); t.p.cidx[i] = '0; end
    return t;
  endfunction

  function automatic bit ref_b(po_t t);
    for (int i = 0; i < int'(t.pos); i++) if (t.p.vid[i] == t.p.vid[t.pos]) return 1'b0;
    return 1'b1;
  endfunction

  int n0 = 0, n1 = 0, sent = 0, got = 0, cyc = 0;
  bit stall_phase;
  bit took = 0;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_b == exp_q[0], "b_v");
      if (out_b) n1++; else n0++;
      void'(exp_q.pop_front()); got++;
    end
    took <= in_valid && in_ready;
    if (in_valid && in_ready) begin exp_q.push_back(ref_b(in_data)); sent++; end
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // full-rate phase: 200 tasks, no stalls
    stall_phase = 0;
    for (int i = 0; i < 200; i++) begin in_valid = 1; in_data = rnd(); @(negedge clk); cyc++; end
    in_valid = 0;
    check(cyc == 200, "one task per cycle");
    // stall phase
    for (int i = 0; i < 2000; i++) begin
      if (took || !in_valid) in_data = rnd();
      in_valid  = ($urandom % 3) != 0;
      out_ready = ($urandom % 3) != 0;
      @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    check(got == sent, "every task answered");
    check(n0 > 0 && n1 > 0, "both outcomes seen");
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
