// cst_bram: on-chip copy of one partitioned candidate search tree (CST).
//
// Two memories hold the CST. The candidate table maps (position u, candidate
// index i) to the data-vertex id of the i-th vertex of C(u). The adjacency
// memory holds one row per (u, u', i): the list N^u_{u'}(v) of the candidates
// of u' adjacent to v = C(u)[i], as candidate indices of C(u'). The host writes
// the row for every tree edge (parent -> child) and for every non-tree edge
// (u -> earlier non-tree neighbour u_n). Each row is array-partitioned into
// PORT_MAX separate entries so the Edge Validator compares one vertex against
// all of them in one cycle; this is why a CST whose maximum candidate degree
// exceeds PORT_MAX is partitioned further by the host (paper, Port_max).
//
// Ports: one write port per memory, used while loading a CST from card DRAM;
// read port A (candidate table and adjacency) serves the Tv Generator, read
// port B (adjacency) the Edge Validator. All reads are synchronous with a
// one-cycle latency, as BRAM; a read data register holds its value until the
// next read on that port. The layout of rows is this design's choice.
module cst_bram
  import fast_pkg::*;
(
  input  logic      clk,
  // load port
  input  logic      cand_we,
  input  qpos_t     cand_wu,
  input  cidx_t     cand_wi,
  input  vid_t      cand_wdata,
  input  logic      adj_we,
  input  qpos_t     adj_wu,
  input  qpos_t     adj_wun,
  input  cidx_t     adj_wi,
  input  adj_row_t  adj_wdata,
  // read port A: candidate id
  input  logic      cand_re,
  input  qpos_t     cand_ru,
  input  cidx_t     cand_ri,
  output vid_t      cand_rdata,
  // read port A: adjacency row
  input  logic      adja_re,
  input  qpos_t     adja_u,
  input  qpos_t     adja_un,
  input  cidx_t     adja_i,
  output adj_row_t  adja_rdata,
  // read port B: adjacency row
  input  logic      adjb_re,
  input  qpos_t     adjb_u,
  input  qpos_t     adjb_un,
  input  cidx_t     adjb_i,
  output adj_row_t  adjb_rdata
);
  localparam int CAND_WORDS = MAX_QV * MAX_CAND;
  localparam int ADJ_WORDS  = MAX_QV * MAX_QV * MAX_CAND;

  vid_t     cand_mem [CAND_WORDS];
  adj_row_t adj_mem  [ADJ_WORDS];

  always_ff @(posedge clk) begin
    if (cand_we) cand_mem[{cand_wu, cand_wi}] <= cand_wdata;
    if (cand_re) cand_rdata <= cand_mem[{cand_ru, cand_ri}];
  end

  always_ff @(posedge clk) begin
    if (adj_we)  adj_mem[{adj_wu, adj_wun, adj_wi}] <= adj_wdata;
    if (adja_re) adja_rdata <= adj_mem[{adja_u, adja_un, adja_i}];
    if (adjb_re) adjb_rdata <= adj_mem[{adjb_u, adjb_un, adjb_i}];
  end
endmodule
