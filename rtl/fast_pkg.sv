// fast_pkg: sizes and record types shared by the FAST subgraph-matching kernel.
//
// The kernel matches a query graph q against a candidate search tree (CST) held
// on chip. Query vertices are numbered by their position in the matching order,
// so "position" and "query vertex" are the same index everywhere below. A
// partial result records, for every mapped position, the data-vertex id and the
// index of that candidate inside C(u). The records here are the items that flow
// through the FIFOs between Generator, Validators and Synchronizer.
//
// Sizes: the paper gives none of these numbers; all are this design's choices
// and documented in README (query size from the largest LDBC query, 7 vertices;
// 32-bit vertex ids cover the 187.11M-vertex DG60 graph).
package fast_pkg;

  parameter int MAX_QV   = 8;                    // query vertices (positions)
  parameter int VID_W    = 32;                   // data-vertex id width
  parameter int MAX_CAND = 1024;                 // candidates per query vertex in one CST
  parameter int PORT_MAX = 16;                   // array-partitioned adjacency ports (= delta_D)
  parameter int QV_W     = $clog2(MAX_QV);
  parameter int CIDX_W   = $clog2(MAX_CAND);
  parameter int CNT_W    = $clog2(PORT_MAX + 1);

  typedef logic [VID_W-1:0]  vid_t;
  typedef logic [CIDX_W-1:0] cidx_t;
  typedef logic [QV_W-1:0]   qpos_t;
  typedef logic [CIDX_W:0]   ccnt_t;             // 0 .. MAX_CAND

  // A (partial) embedding: entries at positions >= depth are don't-care.
  typedef struct packed {
    vid_t  [MAX_QV-1:0] vid;
    cidx_t [MAX_QV-1:0] cidx;
  } presult_t;

  // A newly expanded partial result p_o; pos is the position just mapped.
  // The same record is the visited-validation task t_v = (v, p_i):
  // v = p.vid[pos], p_i = p.vid[pos-1:0].
  typedef struct packed {
    presult_t p;
    qpos_t    pos;
  } po_t;

  // Edge-validation task t_n = (M(u), M(u_n)), given as CST candidate indices.
  typedef struct packed {
    qpos_t u;
    cidx_t cv;
    qpos_t un;
    cidx_t cvn;
    logic  last;     // last t_n of this p_o
  } tn_t;

  // Edge-validation result bit, one per t_n.
  typedef struct packed {
    logic b;
    logic last;
  } bn_t;

  // One adjacency list N^u_{u'}(v) of the CST, array-partitioned into PORT_MAX
  // entries so all of them can be compared in one cycle.
  typedef struct packed {
    logic [CNT_W-1:0]     cnt;
    cidx_t [PORT_MAX-1:0] nbr;
  } adj_row_t;

  // Query description written by the host before a run.
  typedef struct packed {
    logic [QV_W:0]                  num_qv;   // |V(q)|, 1 .. MAX_QV
    qpos_t [MAX_QV-1:0]             parent;   // tree parent position of each position > 0
    logic [MAX_QV-1:0][MAX_QV-1:0]  nt_mask;  // nt_mask[u][j]: j < u is a non-tree neighbour of u
    ccnt_t                          root_cnt; // |C(root)|
  } query_cfg_t;

  // Event counters of one run.
  typedef struct packed {
    logic [31:0] rounds;
    logic [31:0] expanded;      // p_o generated
    logic [31:0] visited_fail;
    logic [31:0] edge_fail;
    logic [31:0] results;
    logic [31:0] result_stall;  // cycles a complete result waited on res_ready
    logic [31:0] splits;        // rounds ended inside one candidate list (|C(u)| > space left)
  } fast_stats_t;

endpackage
