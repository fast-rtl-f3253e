// tb_synchronizer: feeds random p_o records, visited bits and groups of edge
// bits that arrive at random times (queues released a few entries at a time)
// and checks, in order, which p_o are written back to which buffer level,
// which are reported as complete embeddings, and that every p_o is retired
// once. res_ready is dropped at random; stalls must hold the result.
module tb_synchronizer;
  import fast_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  query_cfg_t cfg = '0;
  logic clear = 0;
  logic po_valid, po_pop, bv_valid, bv_b, bv_pop, bn_valid, bn_pop;
  po_t  po_data;
  bn_t  bn_data;
  logic buf_push, res_valid, res_ready = 1, collect;
  qpos_t buf_level;
  presult_t buf_data, res_data;
  logic ev_visited_fail, ev_edge_fail, ev_result, ev_stall;
  int checks = 0, failures = 0;

  synchronizer dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  po_t po_q [$];
  bit  bv_q [$];
  bn_t bn_q [$];
  int  po_vis = 0, bv_vis = 0, bn_vis = 0;     // entries released to the DUT
  typedef struct { bit res; qpos_t lvl; presult_t p; } exp_t;
  exp_t exp_q [$];
  int n_push = 0, n_res = 0, n_drop = 0, n_coll = 0, n_stall = 0, total = 0;

  assign po_valid = po_vis > 0;
  assign po_data  = po_q.size() > 0 ? po_q[0] : '0;
  assign bv_valid = bv_vis > 0;
  assign bv_b     = bv_q.size() > 0 ? bv_q[0] : 1'b0;
  assign bn_valid = bn_vis > 0;
  assign bn_data  = bn_q.size() > 0 ? bn_q[0] : '0;

  task automatic add_one();
    po_t p;
    bit b_v, b_n = 1'b1;
    int n;
    p.pos = qpos_t'($urandom % int'(cfg.num_qv));
    for (int i = 0; i < MAX_QV; i++) begin p.p.vid[i] = vid_t'($urandom); p.p.cidx[i] = cidx_t'($urandom); end
    b_v = ($urandom % 5) != 0;
    n = $countones(cfg.nt_mask[p.pos]);
    for (int k = 0; k < n; k++) begin
      bn_t b = '{b: (($urandom % 4) != 0), last: (k == n - 1)};
      b_n &= b.b;
      bn_q.push_back(b);
    end
    po_q.push_back(p); bv_q.push_back(b_v);
    if (b_v && b_n) begin
      exp_t e;
      e.res = (int'(p.pos) + 1 == int'(cfg.num_qv));
      e.lvl = p.pos + 1'b1;
      e.p   = p.p;
      exp_q.push_back(e);
    end else n_drop++;
    total++;
  endtask

  always @(posedge clk) if (rst_n) begin
    if (res_valid && !res_ready) n_stall++;
    if (buf_push || (res_valid && res_ready)) begin
      check(exp_q.size() > 0, "unexpected output");
      if (exp_q.size() > 0) begin
        check(exp_q[0].res == (res_valid && res_ready), "result vs write-back");
        check(buf_push ? (buf_level == exp_q[0].lvl && buf_data == exp_q[0].p) : (res_data == exp_q[0].p), "record and level");
        void'(exp_q.pop_front());
      end
      if (buf_push) n_push++; else n_res++;
    end
    check(!(buf_push && res_valid && res_ready), "one output per cycle");
    if (collect) n_coll++;
    if (po_pop) begin void'(po_q.pop_front()); po_vis--; end
    if (bv_pop) begin void'(bv_q.pop_front()); bv_vis--; end
    if (bn_pop) begin void'(bn_q.pop_front()); bn_vis--; end
    check(po_pop == bv_pop, "p_o and b_v retire together");
    // release more entries at random
    if (po_vis < po_q.size() && ($urandom % 2)) po_vis++;
    if (bv_vis < bv_q.size() && ($urandom % 2)) bv_vis++;
    if (bn_vis < bn_q.size() && ($urandom % 2)) bn_vis++;
    res_ready <= ($urandom % 3) != 0;
  end

  initial begin
    cfg.num_qv = 5;
    cfg.nt_mask[2] = 8'b0000_0001;
    cfg.nt_mask[3] = 8'b0000_0011;
    cfg.nt_mask[4] = 8'b0000_0110;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) add_one();
    repeat (5000) @(negedge clk);
    check(n_coll == total, "every p_o retired once");
    check(exp_q.size() == 0, "every valid p_o delivered");
    check(n_push > 0 && n_res > 0 && n_drop > 0 && n_stall > 0, "write-back, result, drop and stall all seen");
    $display("pushes=%0d results=%0d dropped=%0d stalls=%0d", n_push, n_res, n_drop, n_stall);
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
