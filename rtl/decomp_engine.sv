// decomp_engine: the decompression engine of one qubit channel. It turns one
// compressed window per cycle (NCOMP words for I and NCOMP words for Q, read
// in parallel from the banked memory) into WS samples for each of the I and
// Q DACs.
//
// Per channel the pipeline is: RLE decoder -> RLE buffer -> integer IDCT ->
// IDCT buffer -> DAC, with the flat-top bypass from the RLE buffer straight
// into the IDCT buffer. The I and Q channels are compressed separately but
// with the same number of words per window and, in this design, the same
// flat-top segments, so the stall of the I decoder drives the sequencer and
// an assertion checks that the Q decoder agrees.
//
// Timing: words in cycle t (registered memory output), RLE buffer in t+1,
// samples at the IDCT buffer output in t+2. Throughput one window (WS
// samples per channel) per cycle, also during flat-top runs.
module decomp_engine
  import compaqt_pkg::*;
#(
  parameter int unsigned WS    = compaqt_pkg::C_WS,
  parameter int unsigned NCOMP = compaqt_pkg::C_NCOMP
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  coef_t   i_words   [NCOMP],
  input  coef_t   q_words   [NCOMP],
  output logic    stall_o,
  output logic    out_valid,
  output sample_t i_win     [WS],
  output sample_t q_win     [WS],
  output logic    bypass_o,     // the window now in the RLE buffer skips the IDCT
  output logic    run_start_o
);

  logic    stall_i, stall_q, run_i, run_q;
  logic    bv_i, bv_q, bp_i, bp_q;
  sample_t flat_i, flat_q;
  coef_t   coef_i [WS];
  coef_t   coef_q [WS];
  sample_t idct_i [WS];
  sample_t idct_q [WS];
  logic    ov_q;

  rle_decoder #(.WS(WS), .NCOMP(NCOMP)) u_rle_i (
    .clk, .rst_n, .in_valid, .words_i(i_words), .stall_o(stall_i),
    .buf_valid(bv_i), .buf_bypass(bp_i), .buf_flat(flat_i), .buf_coef(coef_i),
    .run_start_o(run_i));

  rle_decoder #(.WS(WS), .NCOMP(NCOMP)) u_rle_q (
    .clk, .rst_n, .in_valid, .words_i(q_words), .stall_o(stall_q),
    .buf_valid(bv_q), .buf_bypass(bp_q), .buf_flat(flat_q), .buf_coef(coef_q),
    .run_start_o(run_q));

  int_idct #(.WS(WS)) u_idct_i (.coef_i(coef_i), .samp_o(idct_i));
  int_idct #(.WS(WS)) u_idct_q (.coef_i(coef_q), .samp_o(idct_q));

  idct_buffer #(.WS(WS)) u_buf_i (
    .clk, .rst_n, .in_valid(bv_i), .bypass(bp_i), .flat_i(flat_i), .idct_i(idct_i),
    .win_valid(out_valid), .win_o(i_win));

  idct_buffer #(.WS(WS)) u_buf_q (
    .clk, .rst_n, .in_valid(bv_q), .bypass(bp_q), .flat_i(flat_q), .idct_i(idct_q),
    .win_valid(ov_q), .win_o(q_win));

  assign stall_o     = stall_i;
  assign bypass_o    = bv_i && bp_i;
  assign run_start_o = run_i;

  a_iq_same_structure: assert property (@(posedge clk) disable iff (!rst_n)
    (stall_i == stall_q) && (run_i == run_q) && (bp_i == bp_q) && (out_valid == ov_q));

endmodule
