// tb_round_controller: a behavioural generator and buffer around the
// controller. The model keeps fill counts per level; a round on level l takes
// one or two of its entries and (after some cycles) puts up to two results per
// entry into level l+1, so several levels are often non-empty at once; a round
// on the root takes two root candidates. Checks that
// each round expands the deepest non-empty level, the root only when all levels
// are empty, that no round starts before the previous one has drained, and
// that done comes exactly when everything is empty.
module tb_round_controller;
  import fast_pkg::*;
  localparam int N_O = 4;
  localparam int CW  = $clog2(N_O + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, clear, root_left, gen_start, gen_done = 0, collect = 0, ev_round;
  qpos_t gen_level;
  logic [CW-1:0] gen_emitted = '0;
  logic [MAX_QV-1:0][CW-1:0] buf_cnt;
  int checks = 0, failures = 0;

  round_controller #(.N_O(N_O)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cnt [MAX_QV];
  int root = 0, pending = 0, rounds = 0, roots = 0, nq = 6, multi = 0;
  always_comb for (int l = 0; l < MAX_QV; l++) buf_cnt[l] = CW'(cnt[l]);
  assign root_left = root > 0;

  initial begin
    for (int l = 0; l < MAX_QV; l++) cnt[l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    root = 10;
    start = 1; @(negedge clk); start = 0;
    forever begin
      int deepest, made;
      int take;
      @(negedge clk);
      if (done) break;
      if (!gen_start) continue;
      deepest = 0;
      for (int l = 1; l < MAX_QV; l++) if (cnt[l] > 0) deepest = l;
      check(int'(gen_level) == deepest, "deepest non-empty level chosen");
      for (int l = 1; l < deepest; l++) if (cnt[l] > 0) multi++;
      if (deepest == 0) begin check(root > 0, "root only while candidates remain"); roots++; end
      rounds++;
      // generator: consume the level, emit `made` p_o
      if (deepest == 0) begin
        made = (root > 2) ? 2 : root; root -= made;
      end else begin
        // take one or two p_i (part of the level stays), each expanding to 0..2 p_o
        take = (cnt[deepest] > 1 && ($urandom % 2) != 0) ? 2 : 1;
        cnt[deepest] -= take;
        made = 0;
        for (int t = 0; t < take; t++) made += $urandom % 3;
      end
      repeat (3) @(negedge clk);
      gen_emitted = CW'(made); gen_done = 1; @(negedge clk); gen_done = 0;
      // synchronizer: retire them, some into the next level
      for (int i = 0; i < made; i++) begin
        repeat ($urandom % 3) @(negedge clk);
        check(!gen_start, "no new round while draining");
        collect = 1;
        if (deepest + 1 < nq - 0 && ($urandom % 3) != 0) cnt[deepest + 1]++;
        @(negedge clk); collect = 0;
      end
    end
    for (int l = 1; l < MAX_QV; l++) check(cnt[l] == 0, "levels empty at done");
    check(root == 0, "root exhausted at done");
    check(roots == 5 && rounds > roots, "root rounds and deeper rounds");
    check(multi > 0, "a choice between several non-empty levels happened");
    @(negedge clk);
    check(!busy, "idle after done");
    $display("rounds=%0d root_rounds=%0d", rounds, roots);
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
