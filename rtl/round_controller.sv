// round_controller: the outer loop of FAST ("while P is not empty").
//
// After start it clears the buffer and the generator offsets, then runs
// rounds. Each round it picks the deepest level n of the intermediate results
// buffer that holds partial results and has the Tv Generator expand it; when
// all levels are empty it expands the root (virtual level 0) while root
// candidates remain; when nothing remains the run ends with done. Expanding
// the deepest level first is what bounds every level to N_O entries (paper,
// Sec. "Cycle Analysis and Buffer Design"). A round is over when the generator
// has reported how many p_o it emitted and the Synchronizer has retired that
// many; only then can the buffer counts be trusted for the next choice.
//
// The paper states the policy; the state machine and handshake are this
// design's own.
module round_controller
  import fast_pkg::*;
#(
  parameter int N_O = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  output logic       busy,
  output logic       done,
  output logic       clear,
  input  logic [MAX_QV-1:0][$clog2(N_O+1)-1:0] buf_cnt,
  input  logic       root_left,
  output logic       gen_start,
  output qpos_t      gen_level,
  input  logic       gen_done,
  input  logic [$clog2(N_O+1)-1:0] gen_emitted,
  input  logic       collect,
  output logic       ev_round
);
  localparam int CW = $clog2(N_O + 1);

  typedef enum logic [2:0] {C_IDLE, C_CLEAR, C_PICK, C_GEN, C_DRAIN, C_DONE} cstate_e;
  cstate_e state;

  logic [CW-1:0] collected, target;
  logic          found;
  qpos_t         deepest;

  always_comb begin
    found   = 1'b0;
    deepest = '0;
    for (int l = 1; l < MAX_QV; l++)
      if (buf_cnt[l] != '0) begin found = 1'b1; deepest = qpos_t'(l); end
  end

  assign busy     = (state != C_IDLE);
  assign ev_round = gen_start;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; collected <= '0; target <= '0;
      done <= 1'b0; clear <= 1'b0; gen_start <= 1'b0; gen_level <= '0;
    end else begin
      done      <= 1'b0;
      clear     <= 1'b0;
      gen_start <= 1'b0;
      if (collect) collected <= collected + 1'b1;
      unique case (state)
        C_IDLE:  if (start) begin clear <= 1'b1; state <= C_CLEAR; end
        C_CLEAR: state <= C_PICK;
        C_PICK: begin
          collected <= '0;
          if (found) begin
            gen_level <= deepest; gen_start <= 1'b1; state <= C_GEN;
          end else if (root_left) begin
            gen_level <= '0; gen_start <= 1'b1; state <= C_GEN;
          end else begin
            state <= C_DONE;
          end
        end
        C_GEN: if (gen_done) begin target <= gen_emitted; state <= C_DRAIN; end
        C_DRAIN: if (collected == target && !collect) state <= C_PICK;
        C_DONE: begin done <= 1'b1; state <= C_IDLE; end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
