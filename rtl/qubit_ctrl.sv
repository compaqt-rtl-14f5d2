// qubit_ctrl: the control block of one qubit (one I/Q DAC pair).
//
// Instruction buffer -> pulse sequencer -> banked compressed waveform
// memory -> decompression engine -> I and Q sample windows for the DACs.
// Many of these blocks run in parallel in compaqt_top, one per qubit, with a
// common time base. The host loads the compressed waveform library into the
// memory banks and pushes timed pulse instructions.
//
// Timing: read issued in cycle t, words from the banks in t+1, RLE buffer in
// t+2, samples on i_win/q_win (out_valid) in t+3. So a pulse whose start time
// is T leaves the block at T+4 (one cycle to take the instruction, three of
// pipeline) and delivers one window of WS samples per cycle from then on.
//
// Following the source architecture: the chain of blocks and one block per
// qubit. This design's own choices: the timed instruction format, the stall
// path from the decoder back to the sequencer, and the zero output while
// idle. The engine's run_start_o, which marks the first window of a
// flat-top run, is left open here; the top reports bypass_o and stall_o
// instead.
module qubit_ctrl
  import compaqt_pkg::*;
#(
  parameter int unsigned WS          = compaqt_pkg::C_WS,
  parameter int unsigned NCOMP       = compaqt_pkg::C_NCOMP,
  parameter int unsigned DEPTH       = compaqt_pkg::C_DEPTH,
  parameter int unsigned INST_DEPTH  = 16,
  localparam int unsigned AW         = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned BW         = (NCOMP > 1) ? $clog2(NCOMP) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [31:0]   time_i,
  // host: waveform memory load
  input  logic          mem_we_i,
  input  logic [BW-1:0] mem_bank_i,
  input  logic [AW-1:0] mem_addr_i,
  input  coef_t         mem_wdata_i_i,
  input  coef_t         mem_wdata_q_i,
  // host: instructions
  input  logic          inst_we_i,
  input  inst_t         inst_i,
  output logic          inst_full_o,
  // DAC side
  output logic          out_valid,
  output sample_t       i_win [WS],
  output sample_t       q_win [WS],
  // status
  output logic          busy_o,
  output logic          mem_re_o,     // a memory read is issued this cycle
  output logic          bypass_o,     // a flat-top window skips the IDCT
  output logic          stall_o,      // reads held back during a flat-top run
  output logic          late_o
);

  logic          empty, pop, stall, re, rvalid;
  inst_t         head;
  logic [AW-1:0] raddr;
  coef_t         i_words [NCOMP];
  coef_t         q_words [NCOMP];

  inst_buffer #(.DEPTH(INST_DEPTH)) u_ibuf (
    .clk, .rst_n, .push_i(inst_we_i), .inst_i, .full_o(inst_full_o),
    .pop_i(pop), .head_o(head), .empty_o(empty));

  pulse_sequencer #(.DEPTH(DEPTH)) u_seq (
    .clk, .rst_n, .time_i, .empty_i(empty), .head_i(head), .pop_o(pop),
    .stall_i(stall), .re_o(re), .raddr_o(raddr), .busy_o, .late_o);

  compressed_wave_mem #(.NCOMP(NCOMP), .DEPTH(DEPTH)) u_mem (
    .clk, .rst_n, .we_i(mem_we_i), .wbank_i(mem_bank_i), .waddr_i(mem_addr_i),
    .wdata_i_i(mem_wdata_i_i), .wdata_q_i(mem_wdata_q_i),
    .re_i(re), .raddr_i(raddr), .rvalid_o(rvalid),
    .i_words_o(i_words), .q_words_o(q_words));

  decomp_engine #(.WS(WS), .NCOMP(NCOMP)) u_dec (
    .clk, .rst_n, .in_valid(rvalid), .i_words, .q_words, .stall_o(stall),
    .out_valid, .i_win, .q_win, .bypass_o, .run_start_o());

  assign mem_re_o = re;
  assign stall_o  = stall;

endmodule
