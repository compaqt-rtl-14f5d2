// pulse_sequencer: plays timed pulse instructions by streaming window
// addresses to the banked compressed waveform memory.
//
// The sequencer watches the head of the instruction buffer. When the global
// time (in fabric clock cycles, one window per cycle) has reached the
// instruction's start time and no pulse is being played, it takes the
// instruction and then issues one read per cycle for the `nent` compressed
// entries starting at window address `addr`. While the decompression engine
// replays a flat-top run (stall_i), it issues no read: this is where
// adaptive decompression saves memory accesses. An instruction whose time
// has already passed when it reaches the head starts at once and is counted
// on late_o. The next instruction can be taken in the same cycle as the last
// read of the previous pulse, so back-to-back pulses play without a gap.
//
// The instruction format and the start rule are this design's choices; the
// architecture describes the sequencer only as triggering gates at their
// scheduled time and driving memory and decompression engine.
//
// Timing: instruction taken in cycle t (pop_o), first read issued in t+1
// unless a flat-top run of the previous pulse is still being replayed.
module pulse_sequencer
  import compaqt_pkg::*;
#(
  parameter int unsigned DEPTH = compaqt_pkg::C_DEPTH,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [31:0]   time_i,
  // instruction buffer
  input  logic          empty_i,
  input  inst_t         head_i,
  output logic          pop_o,
  // decompression engine
  input  logic          stall_i,
  // memory read port
  output logic          re_o,
  output logic [AW-1:0] raddr_o,
  // status
  output logic          busy_o,
  output logic          late_o
);

  logic [AW-1:0] addr;
  logic [15:0]   remaining;
  logic          free;      // no pulse, or the last read of one, this cycle

  always_comb begin
    busy_o  = (remaining != '0);
    re_o    = busy_o && !stall_i;
    free    = !busy_o || (re_o && remaining == 16'd1);
    pop_o   = free && !empty_i && (time_i >= head_i.t_start);
    late_o  = pop_o && (time_i != head_i.t_start);
    raddr_o = addr;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      addr      <= '0;
      remaining <= '0;
    end else if (pop_o) begin
      addr      <= AW'(head_i.addr);
      remaining <= head_i.nent;
    end else if (re_o) begin
      addr      <= addr + AW'(1);
      remaining <= remaining - 16'd1;
    end
  end

endmodule
