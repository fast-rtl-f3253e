// tn_generator: the T_n Generator, second half of the Generator.
//
// It receives its own copy of every new partial result p_o and, for each
// non-tree neighbour u_n of the query vertex u just mapped, emits one
// edge-validation task t_n = (M(u), M(u_n)) as CST candidate indices, together
// with the row address (u, u_n) of the adjacency list to search. The neighbours
// come from cfg.nt_mask[u] (only neighbours earlier in the matching order are
// listed there) and are taken lowest position first, one task per cycle; the
// last task of a p_o carries last = 1. A p_o whose u has no non-tree neighbour
// gives no task; the Synchronizer knows this from the same mask.
//
// Handshake: in_valid/in_ready from the p_o FIFO (in_ready pops it),
// out_valid/out_ready to the t_n FIFO. Following the paper the inner loop is
// pipelined (one t_n per cycle); walking p_o by p_o rather than neighbour by
// neighbour over the whole batch is this design's choice, as the p_o copies
// arrive as a stream.
module tn_generator
  import fast_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  query_cfg_t cfg,
  input  logic       in_valid,
  input  po_t        in_data,
  output logic       in_ready,
  output logic       out_valid,
  output tn_t        out_data,
  input  logic       out_ready
);
  logic              first;        // next cycle starts a fresh p_o
  logic [MAX_QV-1:0] rem_q;
  logic [MAX_QV-1:0] rem, rem_next;
  qpos_t             j;

  assign rem = first ? cfg.nt_mask[in_data.pos] : rem_q;

  always_comb begin
    j = '0;
    for (int b = MAX_QV - 1; b >= 0; b--) if (rem[b]) j = qpos_t'(b);
    rem_next = rem;
    rem_next[j] = 1'b0;
  end

  assign out_valid     = in_valid && (rem != '0);
  assign out_data.u    = in_data.pos;
  assign out_data.cv   = in_data.p.cidx[in_data.pos];
  assign out_data.un   = j;
  assign out_data.cvn  = in_data.p.cidx[j];
  assign out_data.last = (rem_next == '0);
  // consume p_o after its last task, or at once when it has none
  assign in_ready = in_valid && ((rem == '0) || (out_ready && rem_next == '0));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first <= 1'b1;
      rem_q <= '0;
    end else if (clear) begin
      first <= 1'b1;
      rem_q <= '0;
    end else if (in_ready) begin
      first <= 1'b1;
    end else if (out_valid && out_ready) begin
      first <= 1'b0;
      rem_q <= rem_next;
    end
  end
endmodule
