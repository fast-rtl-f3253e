// visited_validator: checks that the newly mapped data vertex v of a p_o is not
// already used by the partial result p_i it extends (injectivity).
//
// The task is the p_o itself: v = p.vid[pos], p_i = p.vid[pos-1:0]. The
// partial result is held as separate registers (array partition), so v is
// compared with every earlier entry at once and the AND of the mismatches is
// the visited bit b_v (1 = passes), as in the paper. Fully pipelined: one task
// per cycle, result one cycle later, with valid/ready on both sides.
module visited_validator
  import fast_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  input  po_t  in_data,
  output logic in_ready,
  output logic out_valid,
  output logic out_b,
  input  logic out_ready
);
  logic b;

  always_comb begin
    b = 1'b1;
    for (int i = 0; i < MAX_QV; i++)
      if (qpos_t'(i) < in_data.pos && in_data.p.vid[i] == in_data.p.vid[in_data.pos]) b = 1'b0;
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_b     <= 1'b0;
    end else if (clear) begin
      out_valid <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_b <= b;
    end
  end
endmodule
