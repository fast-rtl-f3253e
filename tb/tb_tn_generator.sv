// tb_tn_generator: random p_o records under random non-tree masks; the t_n
// stream must list, for each p_o in order, one task per set mask bit (lowest
// first) with the right candidate indices and last on the final one, and
// nothing for a p_o without non-tree neighbours. Random output stalls; one
// task per cycle when unstalled.
module tb_tn_generator;
  import fast_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  po_t in_data = '0;
  tn_t out_data;
  query_cfg_t cfg = '0;
  int checks = 0, failures = 0;

  tn_generator dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  tn_t exp_q [$];
  int sent = 0, got = 0, none = 0, multi = 0;
  bit took = 0;

  function automatic po_t rnd();
    po_t t;
    t.pos = qpos_t'($urandom % MAX_QV);
    for (int i = 0; i < MAX_QV; i++) begin t.p.vid[i] = vid_t'($urandom); t.p.cidx[i] = cidx_t'($urandom); end
    return t;
  endfunction

  bit cur_pushed = 0;
  always @(posedge clk) if (rst_n) begin
    // expected tasks of the p_o on the input, queued when it first appears
    if (in_valid && !cur_pushed) begin
      logic [MAX_QV-1:0] m;
      int n, k;
      m = cfg.nt_mask[in_data.pos];
      n = $countones(m);
      k = 0;
      if (n == 0) none++;
      if (n > 1) multi++;
      for (int j = 0; j < MAX_QV; j++) if (m[j]) begin
        k++;
        exp_q.push_back('{u: in_data.pos, cv: in_data.p.cidx[in_data.pos], un: qpos_t'(j),
                          cvn: in_data.p.cidx[j], last: (k == n)});
      end
      sent++;
    end
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_data == exp_q[0], "t_n");
      void'(exp_q.pop_front()); got++;
    end
    cur_pushed = in_valid && !in_ready;
    took <= in_valid && in_ready;
  end

  initial begin
    int g0, c;
    for (int u = 0; u < MAX_QV; u++)
      for (int j = 0; j < u; j++) cfg.nt_mask[u][j] = ($urandom % 2);
    cfg.nt_mask[0] = '0;
    cfg.nt_mask[MAX_QV-1] = {1'b0, {(MAX_QV-1){1'b1}}};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // rate: a p_o at the last position has MAX_QV-1 tasks, issued back to back
    in_valid = 1; in_data = rnd(); in_data.pos = qpos_t'(MAX_QV - 1);
    g0 = got; c = 0;
    while (got - g0 < MAX_QV - 1) begin @(negedge clk); if (took) in_valid = 0; c++; end
    check(c == MAX_QV - 1, "one t_n per cycle");
    for (int i = 0; i < 3000; i++) begin
      if (took) in_data = rnd();
      if (took || !in_valid) in_valid = ($urandom % 3) != 0;
      out_ready = ($urandom % 3) != 0;
      @(negedge clk);
    end
    out_ready = 1;
    if (in_valid) do @(negedge clk); while (!took);
    in_valid = 0;
    repeat (20) @(negedge clk);
    check(exp_q.size() == 0, "every task produced");
    check(none > 0 && multi > 0, "p_o with none and with several non-tree neighbours");
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
