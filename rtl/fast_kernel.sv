// fast_kernel: the FAST subgraph-matching kernel with task parallelism and
// generator separation (the configuration the paper evaluates as its final one).
//
// The host builds a candidate search tree (CST) for query q and data graph G,
// cuts it into partitions that fit on chip, and loads one partition at a time
// through the load ports into cst_bram. After start, the kernel enumerates every
// embedding contained in that CST and streams each one out on res_*; done pulses
// when the intermediate results buffer is empty and the root is exhausted.
//
// Dataflow (all stages run at once, joined by FIFOs):
//   round_controller picks a level -> tv_generator expands p_i into p_o
//   p_o copy 1 -> t_v FIFO -> visited_validator -> b_v FIFO -> synchronizer
//   p_o copy 2 -> tn_generator -> t_n FIFO -> edge_validator -> b_n FIFO -> synchronizer
//   p_o copy 3 -> p_o FIFO -> synchronizer -> ir_buffer (partial) or res_* (complete)
//
// Interface: cfg describes the query in matching order and must be stable
// from start to done. Loading must not overlap a run. res_valid/res_ready is a
// plain valid/ready stream of complete embeddings (data-vertex ids by position;
// cidx are the candidate indices). stats counts the run's events and is
// cleared by start. overflow reports an intermediate-buffer overflow and must
// stay low. Writing results to card DRAM, DRAM itself and PCIe are outside
// this module; the result stream is where a DRAM writer would attach.
module fast_kernel
  import fast_pkg::*;
#(
  parameter int N_O        = 1024,
  parameter int FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // CST load
  input  logic        cand_we,
  input  qpos_t       cand_wu,
  input  cidx_t       cand_wi,
  input  vid_t        cand_wdata,
  input  logic        adj_we,
  input  qpos_t       adj_wu,
  input  qpos_t       adj_wun,
  input  cidx_t       adj_wi,
  input  adj_row_t    adj_wdata,
  // run control
  input  query_cfg_t  cfg,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // results
  output logic        res_valid,
  output presult_t    res_data,
  input  logic        res_ready,
  output fast_stats_t stats,
  output logic        overflow
);
  localparam int CW = $clog2(N_O + 1);

  logic clear;

  // ---------------- CST memory ----------------
  logic     cand_re;  qpos_t cand_ru;  cidx_t cand_ri;  vid_t cand_rdata;
  logic     adja_re;  qpos_t adja_u, adja_un; cidx_t adja_i; adj_row_t adja_rdata;
  logic     adjb_re;  qpos_t adjb_u, adjb_un; cidx_t adjb_i; adj_row_t adjb_rdata;

  cst_bram u_cst (
    .clk, .cand_we, .cand_wu, .cand_wi, .cand_wdata,
    .adj_we, .adj_wu, .adj_wun, .adj_wi, .adj_wdata,
    .cand_re, .cand_ru, .cand_ri, .cand_rdata,
    .adja_re, .adja_u, .adja_un, .adja_i, .adja_rdata,
    .adjb_re, .adjb_u, .adjb_un, .adjb_i, .adjb_rdata
  );

  // ---------------- intermediate results buffer ----------------
  logic                        buf_rd, buf_pop, buf_push, buf_overflow;
  qpos_t                       buf_rd_level, buf_pop_level, buf_wr_level;
  presult_t                    buf_rd_data, buf_wr_data;
  logic [MAX_QV-1:0][CW-1:0]   buf_cnt;

  ir_buffer #(.N_O(N_O)) u_buf (
    .clk, .rst_n, .clear,
    .rd_req(buf_rd), .rd_level(buf_rd_level), .rd_data(buf_rd_data),
    .pop(buf_pop), .pop_level(buf_pop_level),
    .push(buf_push), .wr_level(buf_wr_level), .wr_data(buf_wr_data),
    .cnt(buf_cnt), .overflow(buf_overflow)
  );
  assign overflow = buf_overflow;

  // ---------------- round control ----------------
  logic          gen_start, gen_done, gen_split, root_left, collect, ev_round;
  qpos_t         gen_level;
  logic [CW-1:0] gen_emitted;

  round_controller #(.N_O(N_O)) u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .clear,
    .buf_cnt, .root_left,
    .gen_start, .gen_level, .gen_done, .gen_emitted,
    .collect, .ev_round
  );

  // ---------------- Tv Generator ----------------
  logic po_valid, po_space;
  po_t  po_data;

  tv_generator #(.N_O(N_O)) u_tvgen (
    .clk, .rst_n, .clear, .cfg,
    .start(gen_start), .level(gen_level), .done(gen_done), .emitted(gen_emitted),
    .split(gen_split), .root_left,
    .buf_cnt, .buf_rd, .buf_rd_level, .buf_rd_data, .buf_pop, .buf_pop_level,
    .adj_re(adja_re), .adj_u(adja_u), .adj_un(adja_un), .adj_i(adja_i), .adj_rdata(adja_rdata),
    .cand_re, .cand_u(cand_ru), .cand_i(cand_ri), .cand_rdata,
    .out_space(po_space), .out_valid(po_valid), .out_data(po_data)
  );

  // ---------------- the three p_o copies ----------------
  po_t  tv_q, tnin_q, sy_q;
  logic tv_full, tv_afull, tv_empty, tv_pop;
  logic tnin_full, tnin_afull, tnin_empty, tnin_pop;
  logic sy_full, sy_afull, sy_empty, sy_pop;

  assign po_space = !tv_afull && !tnin_afull && !sy_afull;

  stream_fifo #(.T(po_t), .DEPTH(FIFO_DEPTH)) u_tv_fifo (
    .clk, .rst_n, .clear, .push(po_valid), .din(po_data), .pop(tv_pop),
    .dout(tv_q), .full(tv_full), .afull(tv_afull), .empty(tv_empty));
  stream_fifo #(.T(po_t), .DEPTH(FIFO_DEPTH)) u_tnin_fifo (
    .clk, .rst_n, .clear, .push(po_valid), .din(po_data), .pop(tnin_pop),
    .dout(tnin_q), .full(tnin_full), .afull(tnin_afull), .empty(tnin_empty));
  stream_fifo #(.T(po_t), .DEPTH(FIFO_DEPTH)) u_sy_fifo (
    .clk, .rst_n, .clear, .push(po_valid), .din(po_data), .pop(sy_pop),
    .dout(sy_q), .full(sy_full), .afull(sy_afull), .empty(sy_empty));

  // ---------------- Visited Validator ----------------
  logic vv_valid, vv_b, vv_in_ready;
  logic bv_full, bv_afull, bv_empty, bv_pop, bv_q;

  visited_validator u_vv (
    .clk, .rst_n, .clear,
    .in_valid(!tv_empty), .in_data(tv_q), .in_ready(vv_in_ready),
    .out_valid(vv_valid), .out_b(vv_b), .out_ready(!bv_full)
  );
  assign tv_pop = vv_in_ready && !tv_empty;

  stream_fifo #(.T(logic), .DEPTH(FIFO_DEPTH)) u_bv_fifo (
    .clk, .rst_n, .clear, .push(vv_valid && !bv_full), .din(vv_b), .pop(bv_pop),
    .dout(bv_q), .full(bv_full), .afull(bv_afull), .empty(bv_empty));

  // ---------------- Tn Generator ----------------
  logic tng_valid, tng_in_ready;
  tn_t  tng_data, tn_q;
  logic tn_full, tn_afull, tn_empty, tn_pop;

  tn_generator u_tngen (
    .clk, .rst_n, .clear, .cfg,
    .in_valid(!tnin_empty), .in_data(tnin_q), .in_ready(tng_in_ready),
    .out_valid(tng_valid), .out_data(tng_data), .out_ready(!tn_full)
  );
  assign tnin_pop = tng_in_ready;

  stream_fifo #(.T(tn_t), .DEPTH(FIFO_DEPTH)) u_tn_fifo (
    .clk, .rst_n, .clear, .push(tng_valid && !tn_full), .din(tng_data), .pop(tn_pop),
    .dout(tn_q), .full(tn_full), .afull(tn_afull), .empty(tn_empty));

  // ---------------- Edge Validator ----------------
  logic ev_valid, ev_in_ready;
  bn_t  ev_data, bn_q;
  logic bn_full, bn_afull, bn_empty, bn_pop;

  edge_validator u_ev (
    .clk, .rst_n, .clear,
    .in_valid(!tn_empty), .in_data(tn_q), .in_ready(ev_in_ready),
    .adj_re(adjb_re), .adj_u(adjb_u), .adj_un(adjb_un), .adj_i(adjb_i), .adj_rdata(adjb_rdata),
    .out_valid(ev_valid), .out_data(ev_data), .out_ready(!bn_full)
  );
  assign tn_pop = ev_in_ready && !tn_empty;

  stream_fifo #(.T(bn_t), .DEPTH(FIFO_DEPTH)) u_bn_fifo (
    .clk, .rst_n, .clear, .push(ev_valid && !bn_full), .din(ev_data), .pop(bn_pop),
    .dout(bn_q), .full(bn_full), .afull(bn_afull), .empty(bn_empty));

  // ---------------- Synchronizer ----------------
  logic ev_vfail, ev_efail, ev_res, ev_stall;

  synchronizer u_sync (
    .clk, .rst_n, .clear, .cfg,
    .po_valid(!sy_empty), .po_data(sy_q), .po_pop(sy_pop),
    .bv_valid(!bv_empty), .bv_b(bv_q), .bv_pop,
    .bn_valid(!bn_empty), .bn_data(bn_q), .bn_pop,
    .buf_push, .buf_level(buf_wr_level), .buf_data(buf_wr_data),
    .res_valid, .res_data, .res_ready,
    .collect, .ev_visited_fail(ev_vfail), .ev_edge_fail(ev_efail),
    .ev_result(ev_res), .ev_stall
  );

  // ---------------- event counters ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stats <= '0;
    end else if (clear) begin
      stats <= '0;
    end else begin
      stats.rounds       <= stats.rounds       + 32'(ev_round);
      stats.expanded     <= stats.expanded     + 32'(po_valid);
      stats.visited_fail <= stats.visited_fail + 32'(ev_vfail);
      stats.edge_fail    <= stats.edge_fail    + 32'(ev_efail);
      stats.results      <= stats.results      + 32'(ev_res);
      stats.result_stall <= stats.result_stall + 32'(ev_stall);
      stats.splits       <= stats.splits       + 32'(gen_done && gen_split);
    end
  end

  // Every p_o gets exactly one b_v: the b_v FIFO never runs ahead of the p_o FIFO.
  a_bv_order: assert property (@(posedge clk) disable iff (!rst_n) bv_pop |-> sy_pop);
endmodule
