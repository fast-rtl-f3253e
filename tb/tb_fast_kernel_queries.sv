// tb_fast_kernel_queries: end-to-end test of fast_kernel on the evaluated query shapes, with every parameter
// at its default
//
// The testbench plays the host: it builds candidate search trees (for the nine
// query graphs q0..q8 the paper evaluates, over small random labelled data
// graphs of rising density, with candidates filtered by label; the embedding
// count is also computed straight from the data graph), loads each into the kernel, runs it and compares
// the stream of complete embeddings with a reference enumeration done here by
// brute force over every combination of candidates (tree-edge lists, non-tree
// edge lists and distinct data vertices checked one by one). Each embedding
// must be expected and reported once, the count must match, the buffer must
// not overflow. res_ready is dropped at random to exercise back-pressure.
// It also counts how often each mechanism of the kernel happened (rounds,
// candidate-list splits at the N_O limit, visited and edge failures, result
// stalls, FIFO back-pressure, a buffer level filled to N_O) and fails if one
// never did, and checks the cycle count of each run against the bound
// N + max(N, M) + 5N + 24 * rounds + 40 (N p_o and M edge tasks in the run).
module tb_fast_kernel_queries;
  import fast_pkg::*;

  localparam int N_O   = 1024;
  localparam int NTEST = 3;
  localparam int ROOTMAX = 40;  // largest root candidate list drawn
  localparam bit QUERIES = 1'b1; // run the evaluated query shapes instead of random CSTs
  localparam bit FULL  = 1'b1;   // defaults: a root list cannot exceed N_O = MAX_CAND
  localparam int CW    = $clog2(N_O + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        cand_we = 1'b0, adj_we = 1'b0;
  qpos_t       cand_wu = '0, adj_wu = '0, adj_wun = '0;
  cidx_t       cand_wi = '0, adj_wi = '0;
  vid_t        cand_wdata = '0;
  adj_row_t    adj_wdata = '0;
  query_cfg_t  cfg = '0;
  logic        start = 1'b0, busy, done, res_valid, res_ready = 1'b1, overflow;
  presult_t    res_data;
  fast_stats_t stats;

  fast_kernel dut (
    .clk, .rst_n, .cand_we, .cand_wu, .cand_wi, .cand_wdata,
    .adj_we, .adj_wu, .adj_wun, .adj_wi, .adj_wdata,
    .cfg, .start, .busy, .done, .res_valid, .res_data, .res_ready, .stats, .overflow
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // ---------------- host-side CST copy ----------------
  int       nq;
  int       ncand [MAX_QV];
  vid_t     cv    [MAX_QV][MAX_CAND];
  adj_row_t rows  [MAX_QV][MAX_QV][MAX_CAND];
  qpos_t    par   [MAX_QV];
  logic [MAX_QV-1:0] ntm [MAX_QV];

  task automatic write_cand(int u, int i, vid_t v);
    cv[u][i] = v;
    @(negedge clk);
    cand_we = 1'b1; cand_wu = qpos_t'(u); cand_wi = cidx_t'(i); cand_wdata = v;
    @(negedge clk);
    cand_we = 1'b0;
  endtask

  task automatic write_row(int u, int un, int i, adj_row_t r);
    rows[u][un][i] = r;
    @(negedge clk);
    adj_we = 1'b1; adj_wu = qpos_t'(u); adj_wun = qpos_t'(un); adj_wi = cidx_t'(i); adj_wdata = r;
    @(negedge clk);
    adj_we = 1'b0;
  endtask

  function automatic bit in_row(adj_row_t r, int j);
    for (int k = 0; k < int'(r.cnt); k++) if (int'(r.nbr[k]) == j) return 1'b1;
    return 1'b0;
  endfunction

  // ---------------- reference enumeration ----------------
  bit exp_set [logic [MAX_QV*CIDX_W-1:0]];
  bit seen    [logic [MAX_QV*CIDX_W-1:0]];
  int n_exp, n_po_ref, n_tn_ref;

  function automatic logic [MAX_QV*CIDX_W-1:0] key_of(cidx_t c [MAX_QV]);
    logic [MAX_QV*CIDX_W-1:0] k = '0;
    for (int u = 0; u < MAX_QV; u++) k[u*CIDX_W +: CIDX_W] = (u < nq) ? c[u] : '0;
    return k;
  endfunction

  // Checks the prefix 0..d of combination c (tree edge, non-tree edges, distinct vertex).
  function automatic bit prefix_ok(cidx_t c [MAX_QV], int d);
    if (d > 0 && !in_row(rows[par[d]][d][c[par[d]]], int'(c[d]))) return 1'b0;
    for (int j = 0; j < d; j++) begin
      if (ntm[d][j] && !in_row(rows[d][j][c[d]], int'(c[j]))) return 1'b0;
      if (cv[j][c[j]] == cv[d][c[d]]) return 1'b0;
    end
    return 1'b1;
  endfunction

  task automatic reference();
    cidx_t c [MAX_QV];
    int    d;
    bit    ok;
    exp_set.delete(); seen.delete();
    n_exp = 0; n_po_ref = 0; n_tn_ref = 0;
    for (int u = 0; u < MAX_QV; u++) c[u] = '0;
    // depth-first walk over candidate indices with an explicit stack
    d = 0;
    while (d >= 0) begin
      if (int'(c[d]) >= ncand[d]) begin
        c[d] = '0; d--;
        if (d >= 0) c[d] = c[d] + 1'b1;
        continue;
      end
      // does c[d] extend a valid prefix as a child of c[par[d]]?
      ok = 1'b1;
      if (d > 0 && !in_row(rows[par[d]][d][c[par[d]]], int'(c[d]))) ok = 1'b0;
      if (ok) begin
        n_po_ref++;                                      // a p_o the kernel also makes
        n_tn_ref += $countones(ntm[d]);
        ok = prefix_ok(c, d);
      end
      if (ok && d == nq - 1) begin
        exp_set[key_of(c)] = 1'b1; n_exp++;
        c[d] = c[d] + 1'b1;
      end else if (ok) begin
        d++; c[d] = '0;
      end else begin
        c[d] = c[d] + 1'b1;
      end
    end
  endtask

  // ---------------- CST builders ----------------
  task automatic clear_cst();
    for (int u = 0; u < MAX_QV; u++) begin ncand[u] = 0; par[u] = '0; ntm[u] = '0; end
  endtask

  function automatic adj_row_t make_row(int u, int pct);
    adj_row_t r = '0;
    int n = 0;
    for (int j = 0; j < ncand[u] && n < PORT_MAX; j++)
      if (($urandom % 100) < pct) begin r.nbr[n] = cidx_t'(j); n++; end
    r.cnt = CNT_W'(n);
    return r;
  endfunction

  // The partitioned CST of the paper's running example: C(u0)={v1},
  // C(u1)={v3,v5}, C(u2)={v6,v8}, C(u3)={v9,v10}; tree u0-u1, u0-u2, u1-u3;
  // non-tree u1-u2 (v3-v6, v5-v8) and u2-u3.
  task automatic build_example();
    adj_row_t r;
    clear_cst();
    nq = 4;
    par[1] = 0; par[2] = 0; par[3] = 1;
    ntm[2] = 8'b0000_0010; ntm[3] = 8'b0000_0100;
    ncand[0] = 1; ncand[1] = 2; ncand[2] = 2; ncand[3] = 2;
    write_cand(0, 0, 1);
    write_cand(1, 0, 3); write_cand(1, 1, 5);
    write_cand(2, 0, 6); write_cand(2, 1, 8);
    write_cand(3, 0, 9); write_cand(3, 1, 10);
    r = '0; r.cnt = 2; r.nbr[0] = 0; r.nbr[1] = 1; write_row(0, 1, 0, r);
    r = '0; r.cnt = 2; r.nbr[0] = 0; r.nbr[1] = 1; write_row(0, 2, 0, r);
    r = '0; r.cnt = 1; r.nbr[0] = 0; write_row(1, 3, 0, r);           // v3 - v9
    r = '0; r.cnt = 1; r.nbr[0] = 1; write_row(1, 3, 1, r);           // v5 - v10
    r = '0; r.cnt = 1; r.nbr[0] = 0; write_row(2, 1, 0, r);           // v6 - v3
    r = '0; r.cnt = 1; r.nbr[0] = 1; write_row(2, 1, 1, r);           // v8 - v5
    r = '0; r.cnt = 1; r.nbr[0] = 0; write_row(3, 2, 0, r);           // v9 - v6
    r = '0; r.cnt = 2; r.nbr[0] = 0; r.nbr[1] = 1; write_row(3, 2, 1, r); // v10 - v6, v8
  endtask

  task automatic build_random(int t);
    clear_cst();
    nq = 2 + ($urandom % (MAX_QV - 2));                 // 2 .. 7 query vertices
    for (int u = 1; u < nq; u++) begin
      par[u] = qpos_t'($urandom % u);
      for (int j = 0; j < u; j++)
        if (j != int'(par[u]) && ($urandom % 100) < 30) ntm[u][j] = 1'b1;
    end
    for (int u = 0; u < nq; u++) begin
      ncand[u] = (u == 0) ? 1 + ($urandom % ROOTMAX) : 1 + ($urandom % 5);
      if (ncand[u] > MAX_CAND) ncand[u] = MAX_CAND;
      for (int i = 0; i < ncand[u]; i++) begin
        vid_t v;
        bit dup;
        do begin                                        // distinct within C(u), shared across
          v = vid_t'($urandom % ((ncand[u] > 12) ? 2 * ncand[u] : 24));
          dup = 1'b0;
          for (int k = 0; k < i; k++) if (cv[u][k] == v) dup = 1'b1;
        end while (dup);
        write_cand(u, i, v);
      end
    end
    for (int u = 1; u < nq; u++) begin
      for (int i = 0; i < ncand[par[u]]; i++) write_row(int'(par[u]), u, i, make_row(u, 70));
      for (int j = 0; j < u; j++)
        if (ntm[u][j]) for (int i = 0; i < ncand[u]; i++) write_row(u, j, i, make_row(j, 60));
    end
    if (t < 0) $display("unused");
  endtask


  // ---------------- evaluated query shapes on a synthetic labelled graph ----------------
  // Query graphs q0..q8 of the LDBC-SNB query set (vertex labels and edges as
  // drawn in the source's query figure), each listed in a matching order where
  // every vertex after the first has an earlier neighbour. Labels: 0 Psn,
  // 1 Pos/Post, 2 Cmt, 3 Tag, 4 tCls, 5 Pen, 6 City, 7 CY.
  localparam int GV_PER_LABEL = 12;                      // <= PORT_MAX, so rows never overflow
  localparam int GMAX = 8 * GV_PER_LABEL;
  int  qlab [MAX_QV];
  bit  qadj [MAX_QV][MAX_QV];
  int  gnv;
  int  glab [GMAX];
  bit  gadj [GMAX][GMAX];
  int  g_count;

  task automatic qedge(int a, int b);
    qadj[a][b] = 1'b1; qadj[b][a] = 1'b1;
  endtask

  task automatic define_query(int qi);
    for (int a = 0; a < MAX_QV; a++) begin qlab[a] = 0; for (int b = 0; b < MAX_QV; b++) qadj[a][b] = 1'b0; end
    case (qi)
      0: begin nq = 3; qlab[0:2] = '{0, 1, 2}; qedge(0, 1); qedge(1, 2); end
      1: begin nq = 4; qlab[0:3] = '{3, 4, 1, 4}; qedge(0, 1); qedge(0, 2); qedge(1, 3); end
      2: begin nq = 3; qlab[0:2] = '{0, 0, 5}; qedge(0, 1); qedge(0, 2); qedge(1, 2); end
      3: begin nq = 4; qlab[0:3] = '{0, 0, 2, 1}; qedge(0, 1); qedge(0, 2); qedge(1, 3); qedge(2, 3); end
      4: begin nq = 5; qlab[0:4] = '{1, 3, 0, 2, 0}; qedge(0, 1); qedge(0, 2); qedge(0, 3); qedge(0, 4); end
      5: begin nq = 5; qlab[0:4] = '{7, 6, 6, 0, 0}; qedge(0, 1); qedge(0, 2); qedge(1, 3); qedge(2, 4); qedge(3, 4); end
      6: begin nq = 5; qlab[0:4] = '{6, 7, 0, 0, 0};
               qedge(0, 1); qedge(0, 2); qedge(0, 3); qedge(0, 4); qedge(2, 3); qedge(2, 4); qedge(3, 4); end
      7: begin nq = 7; qlab[0:6] = '{7, 6, 6, 0, 0, 0, 0};
               qedge(0, 1); qedge(0, 2); qedge(1, 3); qedge(1, 4); qedge(3, 4); qedge(2, 5); qedge(2, 6); qedge(5, 6); end
      default: begin nq = 7; qlab[0:6] = '{7, 6, 6, 6, 0, 0, 0};
               qedge(0, 1); qedge(0, 2); qedge(0, 3); qedge(1, 4); qedge(2, 5); qedge(3, 6);
               qedge(4, 5); qedge(5, 6); qedge(4, 6); end
    endcase
  endtask

  // Random graph: GV_PER_LABEL vertices for each label of the query, edges
  // with probability pct percent.
  task automatic make_graph(int pct);
    int labs [$];
    for (int u = 0; u < nq; u++) begin
      bit have = 1'b0;
      foreach (labs[k]) if (labs[k] == qlab[u]) have = 1'b1;
      if (!have) labs.push_back(qlab[u]);
    end
    gnv = labs.size() * GV_PER_LABEL;
    for (int v = 0; v < gnv; v++) glab[v] = labs[v % labs.size()];
    for (int a = 0; a < gnv; a++) for (int b = 0; b < gnv; b++) gadj[a][b] = 1'b0;
    for (int a = 0; a < gnv; a++)
      for (int b = a + 1; b < gnv; b++)
        if (($urandom % 100) < pct) begin gadj[a][b] = 1'b1; gadj[b][a] = 1'b1; end
  endtask

  // Label-filtered CST of the query over the graph: C(u) = vertices with u's
  // label; one row per candidate for the tree edge and for each non-tree edge.
  task automatic build_query_cst();
    clear_cst();
    for (int u = 0; u < nq; u++) begin
      for (int v = 0; v < gnv; v++)
        if (glab[v] == qlab[u]) begin write_cand(u, ncand[u], vid_t'(v)); ncand[u]++; end
    end
    for (int u = 1; u < nq; u++) begin
      int p = -1;
      for (int j = 0; j < u; j++) if (qadj[u][j]) begin
        if (p < 0) p = j; else ntm[u][j] = 1'b1;
      end
      par[u] = qpos_t'(p);
    end
    for (int u = 1; u < nq; u++)
      for (int j = 0; j < u; j++) begin
        if (j == int'(par[u]))
          for (int i = 0; i < ncand[j]; i++) write_row(j, u, i, graph_row(j, i, u));
        else if (ntm[u][j])
          for (int i = 0; i < ncand[u]; i++) write_row(u, j, i, graph_row(u, i, j));
      end
  endtask

  function automatic adj_row_t graph_row(int u, int i, int un);
    adj_row_t r = '0;
    int n = 0;
    for (int j = 0; j < ncand[un]; j++)
      if (gadj[cv[u][i]][cv[un][j]]) begin r.nbr[n] = cidx_t'(j); n++; end
    r.cnt = CNT_W'(n);
    return r;
  endfunction

  // Embedding count straight from the graph (no CST): iterative backtracking.
  function automatic int graph_embeddings();
    int a [MAX_QV];
    int d = 0, n = 0;
    a[0] = -1;
    while (d >= 0) begin
      bit ok;
      do begin
        a[d]++;
        ok = (a[d] < gnv) && (glab[a[d]] == qlab[d]);
        for (int e = 0; e < d; e++)
          if (a[d] < gnv && (a[e] == a[d] || (qadj[d][e] && !gadj[a[d]][a[e]]))) ok = 1'b0;
      end while (a[d] < gnv && !ok);
      if (a[d] >= gnv) d--;
      else if (d == nq - 1) n++;
      else begin d++; a[d] = -1; end
    end
    return n;
  endfunction

  // ---------------- run one CST ----------------
  int m_rounds = 0, m_splits = 0, m_vfail = 0, m_efail = 0, m_stall = 0, m_fifo = 0, m_full = 0;
  int m_results = 0;
  longint s_cyc = 0, s_lsep = 0;   // all runs: cycles, and N + max(N, M)
  int cyc;
  bit rand_ready;

  always @(posedge clk) begin
    if (busy && !dut.po_space) m_fifo++;
    for (int l = 1; l < MAX_QV; l++) if (int'(dut.buf_cnt[l]) == N_O) m_full++;
  end

  task automatic run_one(string name);
    int got = 0;
    cfg = '0;
    cfg.num_qv   = (QV_W+1)'(nq);
    cfg.root_cnt = ccnt_t'(ncand[0]);
    for (int u = 0; u < MAX_QV; u++) begin cfg.parent[u] = par[u]; cfg.nt_mask[u] = ntm[u]; end
    reference();
    @(negedge clk); start = 1'b1;
    @(negedge clk); start = 1'b0;
    cyc = 0;
    while (!done) begin
      res_ready = rand_ready ? (($urandom % 4) != 0) : 1'b1;
      @(posedge clk);
      cyc++;
      if (res_valid && res_ready) begin
        cidx_t c [MAX_QV];
        logic [MAX_QV*CIDX_W-1:0] k;
        bit vid_ok = 1'b1;
        for (int u = 0; u < MAX_QV; u++) c[u] = res_data.cidx[u];
        k = key_of(c);
        for (int u = 0; u < nq; u++) if (res_data.vid[u] != cv[u][c[u]]) vid_ok = 1'b0;
        check(exp_set.exists(k) && !seen.exists(k) && vid_ok, $sformatf("%s: unexpected or repeated embedding %h", name, k));
        seen[k] = 1'b1;
        got++;
      end
      @(negedge clk);
    end
    check(got == n_exp, $sformatf("%s: %0d embeddings, expected %0d", name, got, n_exp));
    check(int'(stats.results) == n_exp, $sformatf("%s: result counter %0d", name, stats.results));
    check(int'(stats.expanded) == n_po_ref, $sformatf("%s: %0d p_o expanded, expected %0d", name, stats.expanded, n_po_ref));
    check(!overflow, $sformatf("%s: buffer overflow", name));
    // cycle budget: the paper's L_sep ~ N + max(N, M) plus a fixed cost per round
    // and per expanded partial result (reading p_i and its list)
    check(cyc <= (n_po_ref + (n_po_ref > n_tn_ref ? n_po_ref : n_tn_ref)) + 5 * n_po_ref + 24 * int'(stats.rounds) + 40,
          $sformatf("%s: %0d cycles for N=%0d M=%0d", name, cyc, n_po_ref, n_tn_ref));
    m_rounds += int'(stats.rounds); m_splits += int'(stats.splits);
    m_vfail += int'(stats.visited_fail); m_efail += int'(stats.edge_fail);
    m_stall += int'(stats.result_stall); m_results += got;
    s_cyc += longint'(cyc); s_lsep += longint'(n_po_ref + (n_po_ref > n_tn_ref ? n_po_ref : n_tn_ref));
    $display("%s: q=%0d |C(root)|=%0d embeddings=%0d N=%0d M=%0d rounds=%0d cycles=%0d",
             name, nq, ncand[0], got, n_po_ref, n_tn_ref, stats.rounds, cyc);
  endtask

  initial begin
    rand_ready = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    if (QUERIES) begin
      rand_ready = 1'b1;
      for (int rep = 0; rep < NTEST; rep++)
        for (int qi = 0; qi < 9; qi++) begin
          int gcnt;
          define_query(qi);
          make_graph(20 + 10 * rep);
          build_query_cst();
          gcnt = graph_embeddings();
          run_one($sformatf("q%0d/%0d", qi, rep));
          check(n_exp == gcnt, $sformatf("q%0d: CST holds %0d embeddings, graph has %0d", qi, n_exp, gcnt));
          if (gcnt > 0) g_count++;
        end
      check(g_count >= 9, "queries with embeddings");
      // over all runs, dominated by the large ones: within 25 % of N + max(N, M)
      $display("all queries: cycles=%0d N+max(N,M)=%0d", s_cyc, s_lsep);
      check(s_cyc * 4 <= s_lsep * 5, "total cycles within 1.25 x (N + max(N, M))");
    end else begin
      build_example();
      run_one("example");
      check(m_results == 2, "example: the worked example has two embeddings");
      rand_ready = 1'b1;
      for (int t = 0; t < NTEST; t++) begin
        build_random(t);
        run_one($sformatf("random%0d", t));
      end
    end
    $display("mechanisms: rounds=%0d splits=%0d visited_fail=%0d edge_fail=%0d result_stall=%0d fifo_backpressure=%0d level_full=%0d results=%0d",
             m_rounds, m_splits, m_vfail, m_efail, m_stall, m_fifo, m_full, m_results);
    check(m_rounds > NTEST, "rounds");
    check(m_results > 0, "embeddings found");
    if (!FULL) check(m_splits > 0,  "candidate list split at N_O");
    check(m_vfail > 0,   "visited validation failure");
    check(m_efail > 0,   "edge validation failure");
    check(m_stall > 0,   "result back-pressure");
    check(m_fifo > 0,    "FIFO back-pressure");
    if (!FULL) check(m_full > 0,    "buffer level filled to N_O");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
