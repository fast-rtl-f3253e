// tb_cst_bram: writes random candidate ids and adjacency rows, reads them back
// on both ports; checks one-cycle read latency and that read data holds while
// no read is issued.
module tb_cst_bram;
  import fast_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic cand_we = 0, adj_we = 0, cand_re = 0, adja_re = 0, adjb_re = 0;
  qpos_t cand_wu = '0, adj_wu = '0, adj_wun = '0, cand_ru = '0, adja_u = '0, adja_un = '0, adjb_u = '0, adjb_un = '0;
  cidx_t cand_wi = '0, adj_wi = '0, cand_ri = '0, adja_i = '0, adjb_i = '0;
  vid_t cand_wdata = '0, cand_rdata;
  adj_row_t adj_wdata = '0, adja_rdata, adjb_rdata;
  int checks = 0, failures = 0;

  cst_bram dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  vid_t     cmodel [int];
  adj_row_t amodel [int];
  int keys_c [$], keys_a [$];

  initial begin
    for (int n = 0; n < 200; n++) begin
      int ka, kc;
      adj_row_t r;
      @(negedge clk);
      cand_we = 1; cand_wu = qpos_t'($urandom); cand_wi = cidx_t'($urandom); cand_wdata = vid_t'($urandom);
      kc = {cand_wu, cand_wi}; cmodel[kc] = cand_wdata; keys_c.push_back(kc);
      adj_we = 1; adj_wu = qpos_t'($urandom); adj_wun = qpos_t'($urandom); adj_wi = cidx_t'($urandom);
      for (int k = 0; k < PORT_MAX; k++) r.nbr[k] = cidx_t'($urandom);
      r.cnt = CNT_W'($urandom % (PORT_MAX + 1));
      adj_wdata = r;
      ka = {adj_wu, adj_wun, adj_wi}; amodel[ka] = r; keys_a.push_back(ka);
    end
    @(negedge clk); cand_we = 0; adj_we = 0;
    for (int n = 0; n < 200; n++) begin
      int kc, ka, kb;
      kc = keys_c[$urandom % keys_c.size()];
      ka = keys_a[$urandom % keys_a.size()];
      kb = keys_a[$urandom % keys_a.size()];
      cand_re = 1; {cand_ru, cand_ri} = kc[QV_W+CIDX_W-1:0];
      adja_re = 1; {adja_u, adja_un, adja_i} = ka[2*QV_W+CIDX_W-1:0];
      adjb_re = 1; {adjb_u, adjb_un, adjb_i} = kb[2*QV_W+CIDX_W-1:0];
      @(negedge clk);
      cand_re = 0; adja_re = 0; adjb_re = 0;
      check(cand_rdata == cmodel[kc], "candidate read");
      check(adja_rdata == amodel[ka], "adjacency port A");
      check(adjb_rdata == amodel[kb], "adjacency port B");
      cand_ri = cand_ri + 1'b1; adja_i = adja_i + 1'b1; adjb_i = adjb_i + 1'b1;
      @(negedge clk);
      check(cand_rdata == cmodel[kc] && adja_rdata == amodel[ka] && adjb_rdata == amodel[kb], "read data holds without re");
    end
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
