// stream_fifo: synchronous first-in first-out buffer between two pipeline stages.
//
// The FAST pipeline decouples Generator, Validators and Synchronizer with FIFOs
// so that each stage works as soon as its input is not empty (task parallelism).
// Storage is a circular array; the head word is visible on dout while !empty
// (first-word fall-through). push is ignored when full and pop when empty.
// afull is raised when at most one free slot is left; a producer with a one-cycle
// read latency in front of it uses afull to stop early enough. The FIFO type
// itself follows the paper; depth and the afull flag are this design's choices.
module stream_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic push,
  input  T     din,
  input  logic pop,
  output T     dout,
  output logic full,
  output logic afull,
  output logic empty
);
  localparam int AW = $clog2(DEPTH);

  T               mem [DEPTH];
  logic [AW-1:0]  wp, rp;
  logic [AW:0]    cnt;
  logic           do_push, do_pop;

  assign full    = (cnt == (AW+1)'(DEPTH));
  assign afull   = (cnt >= (AW+1)'(DEPTH - 1));
  assign empty   = (cnt == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else if (clear) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // A producer must not push into a full FIFO.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && full));
endmodule
