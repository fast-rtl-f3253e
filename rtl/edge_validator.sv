// edge_validator: checks that the edge (v, v_n) of a t_n exists in the CST.
//
// For task (u, i, u_n, j) it reads the adjacency row N^u_{u_n}(C(u)[i]) from
// the CST (read port B) and compares j with all PORT_MAX entries of the row in
// parallel; b_n = 1 when one of the first cnt entries equals j. This is the
// paper's O(1) edge check over an array-partitioned adjacency list.
//
// Pipeline: stage 1 issues the BRAM read and holds the task, stage 2 (out)
// holds the result with the task's last flag. One task per cycle; latency two
// cycles; valid/ready on both sides. The BRAM data register keeps its value
// while stage 1 stalls, because a read is issued only when stage 1 advances.
module edge_validator
  import fast_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     in_valid,
  input  tn_t      in_data,
  output logic     in_ready,
  // CST read port B
  output logic     adj_re,
  output qpos_t    adj_u,
  output qpos_t    adj_un,
  output cidx_t    adj_i,
  input  adj_row_t adj_rdata,
  // result
  output logic     out_valid,
  output bn_t      out_data,
  input  logic     out_ready
);
  logic  s1_valid;
  tn_t   s1;
  logic  advance;
  logic  hit;

  assign advance  = !out_valid || out_ready;
  assign in_ready = advance;
  assign adj_re   = advance && in_valid;
  assign adj_u    = in_data.u;
  assign adj_un   = in_data.un;
  assign adj_i    = in_data.cv;

  always_comb begin
    hit = 1'b0;
    for (int k = 0; k < PORT_MAX; k++)
      if (CNT_W'(k) < adj_rdata.cnt && adj_rdata.nbr[k] == s1.cvn) hit = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1        <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (clear) begin
      s1_valid  <= 1'b0;
      out_valid <= 1'b0;
    end else if (advance) begin
      out_valid <= s1_valid;
      if (s1_valid) out_data <= '{b: hit, last: s1.last};
      s1_valid <= in_valid;
      if (in_valid) s1 <= in_data;
    end
  end
endmodule
