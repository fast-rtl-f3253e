// synchronizer: collects every p_o with its validation bits.
//
// The three FIFOs that feed it (p_o copies, b_v bits, b_n bits) are all in the
// order the Tv Generator produced the p_o, so the head of each belongs to the
// same p_o. For the head p_o at position u it ANDs the b_n bits of all its
// edge tasks (up to the one with last = 1; none when cfg.nt_mask[u] is empty),
// then, if b_v and the edge bits are all 1, it writes the p_o back to level
// u+1 of the intermediate results buffer, or, when u+1 = |V(q)|, sends it out
// as a complete embedding. Invalid p_o are dropped (paper, Alg. 7).
//
// One p_o per cycle when its bits are ready; a complete result waits for
// res_ready (back-pressure from the result sink, counted in stall). collect
// pulses once for every p_o retired, valid or not, so the round controller can
// tell when a round has drained.
module synchronizer
  import fast_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  query_cfg_t cfg,
  // p_o copy
  input  logic       po_valid,
  input  po_t        po_data,
  output logic       po_pop,
  // visited bits
  input  logic       bv_valid,
  input  logic       bv_b,
  output logic       bv_pop,
  // edge bits
  input  logic       bn_valid,
  input  bn_t        bn_data,
  output logic       bn_pop,
  // write-back to the intermediate results buffer
  output logic       buf_push,
  output qpos_t      buf_level,
  output presult_t   buf_data,
  // complete embeddings
  output logic       res_valid,
  output presult_t   res_data,
  input  logic       res_ready,
  // events
  output logic       collect,
  output logic       ev_visited_fail,
  output logic       ev_edge_fail,
  output logic       ev_result,
  output logic       ev_stall
);
  logic acc;          // AND of the b_n bits seen so far for the head p_o
  logic bn_seen_last; // all b_n of the head p_o consumed
  logic need_bn, bn_ready_now, bn_ok, pass, complete, retire;

  assign need_bn      = (cfg.nt_mask[po_data.pos] != '0);
  // take edge bits of the head p_o as they come
  assign bn_pop       = po_valid && need_bn && !bn_seen_last && bn_valid;
  assign bn_ready_now = !need_bn || bn_seen_last || (bn_valid && bn_data.last);
  assign bn_ok        = !need_bn || (acc && (bn_seen_last || bn_data.b));
  assign pass         = bv_b && bn_ok;
  assign complete     = ({1'b0, po_data.pos} + 1'b1) == cfg.num_qv;

  assign res_valid = po_valid && bv_valid && bn_ready_now && pass && complete;
  assign res_data  = po_data.p;
  assign retire    = po_valid && bv_valid && bn_ready_now && !(pass && complete && !res_ready);

  assign po_pop    = retire;
  assign bv_pop    = retire;
  assign buf_push  = retire && pass && !complete;
  assign buf_level = po_data.pos + 1'b1;
  assign buf_data  = po_data.p;

  assign collect         = retire;
  assign ev_visited_fail = retire && !bv_b;
  assign ev_edge_fail    = retire && bv_b && !bn_ok;
  assign ev_result       = retire && pass && complete;
  assign ev_stall        = res_valid && !res_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= 1'b1; bn_seen_last <= 1'b0;
    end else if (clear || retire) begin
      acc <= 1'b1; bn_seen_last <= 1'b0;
    end else if (bn_pop) begin
      acc <= acc & bn_data.b;
      if (bn_data.last) bn_seen_last <= 1'b1;
    end
  end
endmodule
