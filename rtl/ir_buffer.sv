// ir_buffer: BRAM-only intermediate results buffer P.
//
// Partial results that map n query vertices (p^n) are kept in level n, for
// n = 1 .. MAX_QV-1; complete results never enter the buffer. Because every
// round expands the deepest non-empty level, at most N_O results are ever pushed
// into a level before it is drained again, so (MAX_QV-1) x N_O entries never
// overflow (paper, Sec. "Cycle Analysis and Buffer Design"). Each level is a
// stack: the Generator reads and pops the top, the Synchronizer pushes on top
// of the next level, so one read and one write port suffice.
//
// Interface: rd_req with rd_level reads the top entry of that level, data on
// rd_data one cycle later; pop removes it. push writes wr_data on top of
// wr_level. cnt gives the fill of every level (cnt[0] is unused and 0).
// clear empties all levels. overflow is a sticky flag that must stay low.
module ir_buffer
  import fast_pkg::*;
#(
  parameter int N_O = 1024
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  logic     rd_req,
  input  qpos_t    rd_level,
  output presult_t rd_data,
  input  logic     pop,
  input  qpos_t    pop_level,
  input  logic     push,
  input  qpos_t    wr_level,
  input  presult_t wr_data,
  output logic [MAX_QV-1:0][$clog2(N_O+1)-1:0] cnt,
  output logic     overflow
);
  localparam int CW    = $clog2(N_O + 1);
  localparam int WORDS = (MAX_QV - 1) * N_O;
  localparam int AW    = $clog2(WORDS);

  presult_t mem [WORDS];

  function automatic logic [AW-1:0] addr_of(qpos_t lvl, logic [CW-1:0] slot);
    return AW'((int'(lvl) - 1) * N_O + int'(slot));
  endfunction

  logic [CW-1:0] top_slot;
  logic [AW-1:0] waddr, raddr;
  logic          we;
  assign top_slot = cnt[rd_level] - 1'b1;
  assign waddr    = addr_of(wr_level, cnt[wr_level]);
  assign raddr    = addr_of(rd_level, top_slot);
  assign we       = push && (cnt[wr_level] < CW'(N_O));

  always_ff @(posedge clk) begin
    if (we)     mem[waddr] <= wr_data;
    if (rd_req) rd_data <= mem[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      overflow <= 1'b0;
    end else if (clear) begin
      cnt      <= '0;
      overflow <= 1'b0;
    end else begin
      for (int l = 1; l < MAX_QV; l++) begin
        logic up, dn;
        up = push && (wr_level == qpos_t'(l)) && (cnt[l] < CW'(N_O));
        dn = pop  && (pop_level == qpos_t'(l)) && (cnt[l] != '0);
        cnt[l] <= cnt[l] + CW'(up) - CW'(dn);
      end
      if (push && cnt[wr_level] == CW'(N_O)) overflow <= 1'b1;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && cnt[wr_level] == CW'(N_O)));
  a_push_level:  assert property (@(posedge clk) disable iff (!rst_n) push |-> wr_level != '0);
  a_pop_level:   assert property (@(posedge clk) disable iff (!rst_n) pop  |-> pop_level != '0);
endmodule
