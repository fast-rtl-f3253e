// tb_tv_generator: the generator with a real cst_bram and ir_buffer (N_O = 4).
// Level 2 of the buffer is filled with partial results whose candidate lists
// (tree rows from position 1 to 2) have 0 to 7 entries; rounds are run until
// the level is empty. The concatenated p_o stream must be the candidates of
// the stacked p_i in LIFO order and row order, with the right vertex ids, and
// every round must emit what the N_O policy allows (whole lists that fit, a
// split of an oversized list only when the round is empty, lists that fill the
// round exactly are taken whole, the split flag is checked). Then the root
// (virtual level 0) with 10 candidates, taken 4 at a time. out_space is
// dropped at random; with it held high a list comes out one p_o per cycle.
module tb_tv_generator;
  import fast_pkg::*;
  localparam int N_O = 4;
  localparam int CW  = $clog2(N_O + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  query_cfg_t cfg = '0;
  logic clear = 0, start = 0, done, split, root_left;
  qpos_t level = '0;
  logic [CW-1:0] emitted;
  logic [MAX_QV-1:0][CW-1:0] buf_cnt;
  logic buf_rd, buf_pop, out_space = 1, out_valid;
  qpos_t buf_rd_level, buf_pop_level;
  presult_t buf_rd_data;
  logic adj_re, cand_re;
  qpos_t adj_u, adj_un, cand_u;
  cidx_t adj_i, cand_i;
  adj_row_t adj_rdata;
  vid_t cand_rdata;
  po_t out_data;
  // environment write ports
  logic push = 0, cand_we = 0, adj_we = 0, overflow;
  qpos_t wr_level = '0, cand_wu = '0, adj_wu = '0, adj_wun = '0;
  presult_t wr_data = '0;
  cidx_t cand_wi = '0, adj_wi = '0;
  vid_t cand_wdata = '0;
  adj_row_t adj_wdata = '0;

  tv_generator #(.N_O(N_O)) dut (.*);
  ir_buffer #(.N_O(N_O)) u_buf (
    .clk, .rst_n, .clear, .rd_req(buf_rd), .rd_level(buf_rd_level), .rd_data(buf_rd_data),
    .pop(buf_pop), .pop_level(buf_pop_level), .push, .wr_level, .wr_data, .cnt(buf_cnt), .overflow);
  cst_bram u_cst (
    .clk, .cand_we, .cand_wu, .cand_wi, .cand_wdata, .adj_we, .adj_wu, .adj_wun, .adj_wi, .adj_wdata,
    .cand_re, .cand_ru(cand_u), .cand_ri(cand_i), .cand_rdata,
    .adja_re(adj_re), .adja_u(adj_u), .adja_un(adj_un), .adja_i(adj_i), .adja_rdata(adj_rdata),
    .adjb_re(1'b0), .adjb_u('0), .adjb_un('0), .adjb_i('0), .adjb_rdata());

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  vid_t     cvid [MAX_QV][16];
  adj_row_t rows [4];            // rows 1 -> 2 for candidate i of position 1
  presult_t stack [$];           // model of level 2
  po_t      exp_q [$];
  int       got_round = 0, splits = 0, fits_full = 0, gaps = 0, n_out = 0;
  bit       rate_phase = 0, prev_valid = 0;

  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      check(exp_q.size() > 0 && out_data == exp_q[0], "p_o record");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      got_round++; n_out++;
    end
    if (rate_phase && prev_valid && !out_valid && exp_q.size() > 0) gaps++;
    prev_valid <= out_valid;
  end

  task automatic wr_cand(int u, int i, vid_t v);
    cvid[u][i] = v;
    @(negedge clk); cand_we = 1; cand_wu = qpos_t'(u); cand_wi = cidx_t'(i); cand_wdata = v;
    @(negedge clk); cand_we = 0;
  endtask

  // model of one round on level 2; fills exp_q, returns the count
  bit exp_split;
  function automatic int model_round(ref int off);
    int e = 0, a;
    exp_split = 0;
    while (stack.size() > 0) begin
      presult_t pi = stack[$];
      adj_row_t r = rows[pi.cidx[1]];
      a = int'(r.cnt) - off;
      if (e + a <= N_O) begin
        for (int k = off; k < int'(r.cnt); k++) begin
          po_t p = '{p: pi, pos: 2};
          p.p.vid[2] = cvid[2][r.nbr[k]]; p.p.cidx[2] = r.nbr[k];
          exp_q.push_back(p);
        end
        e += a; off = 0; void'(stack.pop_back());
      end else begin
        if (e == 0) begin
          for (int k = off; k < off + N_O; k++) begin
            po_t p = '{p: pi, pos: 2};
            p.p.vid[2] = cvid[2][r.nbr[k]]; p.p.cidx[2] = r.nbr[k];
            exp_q.push_back(p);
          end
          e = N_O; off += N_O; exp_split = 1;
        end
        break;
      end
    end
    return e;
  endfunction

  task automatic run_round(qpos_t l, int expect_n);
    got_round = 0;
    @(negedge clk); level = l; start = 1;
    @(negedge clk); start = 0;
    while (!done) begin
      if (!rate_phase) out_space = ($urandom % 3) != 0;
      @(negedge clk);
    end
    out_space = 1;
    check(int'(emitted) == expect_n && got_round == expect_n, $sformatf("round size %0d/%0d, expected %0d", emitted, got_round, expect_n));
    check(split == exp_split, "split flag");
    if (split) splits++;
  endtask

  initial begin
    int off, n;
    cfg.num_qv = 4; cfg.parent[1] = 0; cfg.parent[2] = 1; cfg.root_cnt = 10;
    for (int i = 0; i < 16; i++) begin wr_cand(0, i, vid_t'(100 + i)); wr_cand(2, i, vid_t'(200 + i)); end
    for (int i = 0; i < 4; i++) begin
      adj_row_t r = '0;
      r.cnt = CNT_W'((i == 3) ? 7 : i * 2);        // 0, 2, 4, 7 candidates
      for (int k = 0; k < int'(r.cnt); k++) r.nbr[k] = cidx_t'((3 * k + i) % 16);
      rows[i] = r;
      @(negedge clk); adj_we = 1; adj_wu = 1; adj_wun = 2; adj_wi = cidx_t'(i); adj_wdata = r;
      @(negedge clk); adj_we = 0;
    end
    rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int pass = 0; pass < 3; pass++) begin
      rate_phase = (pass == 1);
      // fill level 2 with four p_i
      for (int j = 0; j < N_O; j++) begin
        presult_t p = '0;
        p.vid[0] = vid_t'(j); p.vid[1] = vid_t'(50 + j);
        p.cidx[1] = cidx_t'((pass == 2) ? 1 : (j + pass) % 4);   // pass 2: lists of 2, two per round
        stack.push_back(p);
        @(negedge clk); push = 1; wr_level = 2; wr_data = p;
      end
      @(negedge clk); push = 0;
      off = 0;
      while (stack.size() > 0) begin
        n = model_round(off);
        if (n == N_O && !exp_split) fits_full++;
        run_round(2, n);
      end
      check(buf_cnt[2] == '0, "level drained");
    end
    check(gaps == 0, "one p_o per cycle within a list when not stalled");
    check(splits > 0, "oversized list split across rounds");
    // root: 10 candidates, N_O = 4 -> 4, 4, 2
    rate_phase = 0;
    for (int r = 0; r < 3; r++) begin
      for (int k = 4 * r; k < 4 * r + ((r == 2) ? 2 : 4); k++) begin
        po_t p = '{p: '0, pos: 0};
        p.p.vid[0] = vid_t'(100 + k); p.p.cidx[0] = cidx_t'(k);
        exp_q.push_back(p);
      end
      check(root_left, "root candidates left");
      exp_split = (r < 2);
      run_round(0, (r == 2) ? 2 : 4);
    end
    check(!root_left, "root exhausted");
    check(fits_full > 0, "a round filled exactly N_O from whole lists");
    check(exp_q.size() == 0, "all expected p_o seen");
    $display("outputs=%0d splits=%0d", n_out, splits);
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
