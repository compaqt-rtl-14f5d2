// inst_buffer: instruction buffer between the host and the pulse sequencer.
//
// A synchronous first-in first-out queue of DEPTH timed pulse instructions
// (compaqt_pkg::inst_t). The host pushes with push_i while full_o is low; the
// sequencer sees the oldest instruction on head_o while empty_o is low and
// removes it with pop_i. A push and a pop in the same cycle are both taken.
// The depth is this design's choice; the architecture only names the buffer.
//
// Timing: a pushed instruction appears on head_o the cycle after the push.
module inst_buffer
  import compaqt_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  localparam int unsigned PW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  push_i,
  input  inst_t inst_i,
  output logic  full_o,
  input  logic  pop_i,
  output inst_t head_o,
  output logic  empty_o
);

  inst_t       mem [DEPTH];
  logic [PW-1:0] wptr, rptr;
  logic [PW:0]   count;
  logic          do_push, do_pop;

  assign full_o  = (count == (PW+1)'(DEPTH));
  assign empty_o = (count == '0);
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;
  assign head_o  = mem[rptr];

  function automatic logic [PW-1:0] incr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= inst_i;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= incr(wptr);
      if (do_pop)  rptr <= incr(rptr);
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end

  a_no_push_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    push_i |-> !full_o || pop_i);
  a_no_pop_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
    pop_i |-> !empty_o);

endmodule
