// tb_ir_buffer: per-level stacks with N_O = 4: random pushes, top reads and
// pops against a model, level counts, a full level, no overflow, and clear.
// (Pushing into a full level trips the block's assertion, so it is not driven.)
module tb_ir_buffer;
  import fast_pkg::*;
  localparam int N_O = 4;
  localparam int CW = $clog2(N_O + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 0, rd_req = 0, pop = 0, push = 0, overflow;
  qpos_t rd_level = '0, pop_level = '0, wr_level = '0;
  presult_t rd_data, wr_data = '0;
  logic [MAX_QV-1:0][CW-1:0] cnt;
  int checks = 0, failures = 0;
  presult_t model [MAX_QV][$];

  ir_buffer #(.N_O(N_O)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic presult_t rnd();
    presult_t p;
    for (int i = 0; i < MAX_QV; i++) begin p.vid[i] = vid_t'($urandom); p.cidx[i] = cidx_t'($urandom); end
    return p;
  endfunction

  int n_full = 0;
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      int l = 1 + ($urandom % (MAX_QV - 1));
      @(negedge clk);
      push = 0; pop = 0; rd_req = 0;
      for (int k = 1; k < MAX_QV; k++) check(int'(cnt[k]) == model[k].size(), "level count");
      if (($urandom % 2) && model[l].size() < N_O) begin
        push = 1; wr_level = qpos_t'(l); wr_data = rnd();
        model[l].push_back(wr_data);
        if (model[l].size() == N_O) n_full++;
      end else if (model[l].size() > 0) begin
        rd_req = 1; rd_level = qpos_t'(l);
        @(negedge clk);
        rd_req = 0;
        check(rd_data == model[l][$], "top of level");
        pop = 1; pop_level = qpos_t'(l);
        void'(model[l].pop_back());
      end
    end
    @(negedge clk); push = 0; pop = 0;
    check(!overflow, "no overflow in normal use");
    check(n_full > 0, "a level filled to N_O");
    clear = 1; @(negedge clk); clear = 0;
    check(cnt == '0, "clear");
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
