// tb_edge_validator: loads random adjacency rows into a cst_bram, sends random
// t_n tasks (about half of them real edges) with random output stalls, and
// compares every b_n and last flag, in order, with a lookup in the same rows.
// Also checks one task per cycle without stalls.
module tb_edge_validator;
  import fast_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  tn_t in_data = '0;
  bn_t out_data;
  logic adj_re; qpos_t adj_u, adj_un; cidx_t adj_i; adj_row_t adj_rdata;
  logic adj_we = 0; qpos_t adj_wu = '0, adj_wun = '0; cidx_t adj_wi = '0; adj_row_t adj_wdata = '0;
  int checks = 0, failures = 0;

  edge_validator dut (.*);
  cst_bram mem (
    .clk, .cand_we(1'b0), .cand_wu('0), .cand_wi('0), .cand_wdata('0),
    .adj_we, .adj_wu, .adj_wun, .adj_wi, .adj_wdata,
    .cand_re(1'b0), .cand_ru('0), .cand_ri('0), .cand_rdata(),
    .adja_re(1'b0), .adja_u('0), .adja_un('0), .adja_i('0), .adja_rdata(),
    .adjb_re(adj_re), .adjb_u(adj_u), .adjb_un(adj_un), .adjb_i(adj_i), .adjb_rdata(adj_rdata)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  adj_row_t rows [4][4][8];
  bn_t exp_q [$];
  int n0 = 0, n1 = 0, sent = 0, got = 0;
  bit took = 0;

  function automatic tn_t rnd();
    tn_t t;
    adj_row_t r;
    t.u = qpos_t'($urandom % 4); t.un = qpos_t'($urandom % 4); t.cv = cidx_t'($urandom % 8);
    r = rows[t.u][t.un][t.cv];
    if (($urandom % 2) && r.cnt != 0) t.cvn = r.nbr[$urandom % r.cnt];
    else t.cvn = cidx_t'($urandom % 40);
    t.last = 1'($urandom);
    return t;
  endfunction

  function automatic bn_t ref_bn(tn_t t);
    adj_row_t r = rows[t.u][t.un][t.cv];
    bn_t b = '{b: 1'b0, last: t.last};
    for (int k = 0; k < int'(r.cnt); k++) if (r.nbr[k] == t.cvn) b.b = 1'b1;
    return b;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_data == exp_q[0], "b_n and last");
      if (out_data.b) n1++; else n0++;
      void'(exp_q.pop_front()); got++;
    end
    took <= in_valid && in_ready;
    if (in_valid && in_ready) begin exp_q.push_back(ref_bn(in_data)); sent++; end
  end

  initial begin
    int t0;
    for (int u = 0; u < 4; u++) for (int un = 0; un < 4; un++) for (int i = 0; i < 8; i++) begin
      adj_row_t r;
      for (int k = 0; k < PORT_MAX; k++) r.nbr[k] = cidx_t'($urandom % 40);
      r.cnt = CNT_W'($urandom % (PORT_MAX + 1));
      rows[u][un][i] = r;
      @(negedge clk);
      adj_we = 1; adj_wu = qpos_t'(u); adj_wun = qpos_t'(un); adj_wi = cidx_t'(i); adj_wdata = r;
    end
    @(negedge clk); adj_we = 0; rst_n = 1;
    t0 = sent;
    for (int i = 0; i < 100; i++) begin in_valid = 1; in_data = rnd(); @(negedge clk); end
    check(sent - t0 == 100, "one task per cycle");
    for (int i = 0; i < 3000; i++) begin
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
