// tv_generator: the expanding half of the Generator (the "T_v Generator").
//
// For one round it reads partial results p_i from the top of level `level` of
// the intermediate results buffer, looks up the candidates of the next query
// vertex u = position `level` (the list N^{u_p}_u(M(u_p)) in the CST; for the
// root, all of C(root)), and emits one new partial result p_o = p_i x {v} per
// candidate, one per cycle. Each p_o doubles as its visited-validation task
// t_v = (v, p_i) and is sent, as identical copies, to the t_v FIFO, to the
// T_n Generator's FIFO and to the Synchronizer's FIFO (generator separation).
//
// A round emits at most N_O results. The next p_i is taken only if all its
// candidates still fit; otherwise the round ends and p_i stays for later. When
// a single p_i has more candidates than N_O (only the root can in practice), the
// first N_O are emitted and the rest are resumed in a later round from an offset
// kept per level (paper, Alg. 4 and Sec. "Cycle Analysis"). The root is a
// virtual level 0 with one entry; root_left tells whether candidates remain.
//
// Timing: start is a one-cycle pulse; four cycles per p_i to read it and its
// adjacency row, then one p_o per cycle while out_space is high (out_space
// must mean "two free slots" in all three FIFOs, since candidate reads have one
// cycle of latency). done pulses once per round with the number emitted.
module tv_generator
  import fast_pkg::*;
#(
  parameter int N_O = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,          // new run: reset all resume offsets
  input  query_cfg_t cfg,
  input  logic       start,
  input  qpos_t      level,
  output logic       done,
  output logic [$clog2(N_O+1)-1:0] emitted,
  output logic       split,          // this round stopped inside a candidate list
  output logic       root_left,
  // intermediate results buffer
  input  logic [MAX_QV-1:0][$clog2(N_O+1)-1:0] buf_cnt,
  output logic       buf_rd,
  output qpos_t      buf_rd_level,
  input  presult_t   buf_rd_data,
  output logic       buf_pop,
  output qpos_t      buf_pop_level,
  // CST read port A
  output logic       adj_re,
  output qpos_t      adj_u,
  output qpos_t      adj_un,
  output cidx_t      adj_i,
  input  adj_row_t   adj_rdata,
  output logic       cand_re,
  output qpos_t      cand_u,
  output cidx_t      cand_i,
  input  vid_t       cand_rdata,
  // p_o / t_v output to the three FIFOs
  input  logic       out_space,
  output logic       out_valid,
  output po_t        out_data
);
  localparam int CW = $clog2(N_O + 1);

  typedef enum logic [2:0] {S_IDLE, S_RD, S_RD_W, S_ADJ_W, S_DECIDE, S_EMIT, S_DONE} state_e;
  state_e state;

  qpos_t         lvl;
  presult_t      pi;
  ccnt_t         avail_total;            // candidates of current p_i
  adj_row_t      row;
  ccnt_t         off [MAX_QV];           // resume offset of the top entry of each level
  ccnt_t         k, n_emit;
  logic          pop_after, is_root;
  logic [CW-1:0] emit_cnt;

  // stage 1 of the emit pipeline: candidate id read in flight
  logic  s1_valid;
  cidx_t s1_cidx;

  ccnt_t avail;
  assign avail = avail_total - off[lvl];
  assign root_left = (off[0] < cfg.root_cnt);

  ccnt_t pos_k;
  cidx_t cidx_k;
  assign pos_k  = off[lvl] + k;
  assign cidx_k = is_root ? cidx_t'(pos_k) : row.nbr[pos_k[$clog2(PORT_MAX)-1:0]];

  logic issue;
  assign issue = (state == S_EMIT) && out_space && (k < n_emit);

  // buffer and CST read requests
  assign buf_rd       = (state == S_RD) && !buf_pop && (buf_cnt[lvl] != '0);
  assign buf_rd_level = lvl;
  assign adj_re       = (state == S_RD_W);
  assign adj_u        = cfg.parent[lvl];
  assign adj_un       = lvl;
  assign adj_i        = buf_rd_data.cidx[cfg.parent[lvl]];
  assign cand_re      = issue;
  assign cand_u       = lvl;
  assign cand_i       = cidx_k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; lvl <= '0; pi <= '0; row <= '0; avail_total <= '0;
      k <= '0; n_emit <= '0; pop_after <= 1'b0; is_root <= 1'b0; emit_cnt <= '0;
      s1_valid <= 1'b0; s1_cidx <= '0; done <= 1'b0; emitted <= '0; split <= 1'b0;
      buf_pop <= 1'b0; buf_pop_level <= '0;
      for (int l = 0; l < MAX_QV; l++) off[l] <= '0;
    end else begin
      done     <= 1'b0;
      buf_pop  <= 1'b0;
      s1_valid <= issue;
      if (issue) s1_cidx <= cidx_k;
      if (clear) begin
        for (int l = 0; l < MAX_QV; l++) off[l] <= '0;
        state <= S_IDLE;
      end else begin
        unique case (state)
          S_IDLE: if (start) begin
            lvl      <= level;
            emit_cnt <= '0;
            split    <= 1'b0;
            is_root  <= (level == '0);
            if (level == '0) begin
              pi          <= '0;
              avail_total <= cfg.root_cnt;
              state       <= S_DECIDE;
            end else begin
              state <= S_RD;
            end
          end
          S_RD:    if (!buf_pop) state <= (buf_cnt[lvl] != '0) ? S_RD_W : S_DONE;
          S_RD_W:  begin pi <= buf_rd_data; state <= S_ADJ_W; end
          S_ADJ_W: begin
            row         <= adj_rdata;
            avail_total <= ccnt_t'(adj_rdata.cnt);
            state       <= S_DECIDE;
          end
          S_DECIDE: begin
            k <= '0;
            if (int'(emit_cnt) + int'(avail) <= N_O) begin
              n_emit <= avail; pop_after <= 1'b1; state <= S_EMIT;
            end else if (emit_cnt == '0) begin
              n_emit <= (int'(avail) > N_O) ? ccnt_t'(N_O) : avail; pop_after <= 1'b0; state <= S_EMIT;
            end else begin
              split <= (off[lvl] != '0);
              state <= S_DONE;           // does not fit: leave p_i for a later round
            end
          end
          S_EMIT: begin
            if (issue) k <= k + 1'b1;
            if (k == n_emit) begin        // all issued
              emit_cnt <= emit_cnt + CW'(n_emit);
              if (pop_after) begin
                if (is_root) begin
                  off[0] <= cfg.root_cnt;
                  state  <= S_DONE;
                end else begin
                  off[lvl]      <= '0;
                  buf_pop       <= 1'b1;
                  buf_pop_level <= lvl;
                  state         <= S_RD;
                end
              end else begin
                off[lvl] <= off[lvl] + n_emit;
                split    <= 1'b1;
                state    <= S_DONE;
              end
            end
          end
          S_DONE: if (!s1_valid && !buf_pop) begin
            done    <= 1'b1;
            emitted <= emit_cnt;
            state   <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // stage 2: candidate id arrives, form p_o
  always_comb begin
    out_data           = '{p: pi, pos: lvl};
    out_data.p.vid[lvl]  = cand_rdata;
    out_data.p.cidx[lvl] = s1_cidx;
  end
  assign out_valid = s1_valid;

  a_emit_bound: assert property (@(posedge clk) disable iff (!rst_n) done |-> int'(emitted) <= N_O);
endmodule
