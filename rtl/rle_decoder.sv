// rle_decoder: run-length decoder and RLE buffer of one channel (I or Q) of
// the decompression pipeline.
//
// One compressed window arrives per cycle as NCOMP words read in parallel
// from the memory banks: words 0..NCOMP-2 are the leading DCT coefficients
// and word NCOMP-1 is the RLE codeword (layout in compaqt_pkg). The decoder
// recognises the codeword by its signature and expands the window into the
// RLE buffer, a register of WS coefficients: position p takes word p when
// p < NCOMP-1 and p < WS - count, and is zero otherwise, i.e. the last
// `count` inputs of the IDCT are forced to zero. A coefficient slot that a
// window does not use is stored as zero in its bank, so it decodes to zero
// either way. If the last word carries no signature, all NCOMP words are
// taken as coefficients (this design's choice; the compressor always emits
// a codeword).
//
// Adaptive decompression: a codeword with the flat bit set marks a flat-top
// segment. Word 0 then holds the constant time-domain sample and `count` the
// number of windows it lasts. The decoder places the sample in the buffer
// with the bypass flag for `count` consecutive cycles, so the IDCT is skipped
// and the memory is not read: stall_o tells the sequencer to issue no read
// while the run is being replayed. The coefficient part of the buffer keeps
// its old value during a run so the IDCT inputs do not toggle.
//
// Timing: words_i/in_valid are the registered memory outputs of cycle t; the
// buffer (buf_*) is valid in cycle t+1. stall_o is combinational from in_valid
// and the codeword and is high in every cycle in which a read issued in that
// cycle would collide with the run being replayed.
module rle_decoder
  import compaqt_pkg::*;
#(
  parameter int unsigned WS    = compaqt_pkg::C_WS,
  parameter int unsigned NCOMP = compaqt_pkg::C_NCOMP
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  coef_t   words_i   [NCOMP],
  output logic    stall_o,
  output logic    buf_valid,
  output logic    buf_bypass,
  output sample_t buf_flat,
  output coef_t   buf_coef  [WS],
  output logic    run_start_o   // a flat-top run (bypass) begins this cycle
);

  rle_code_t        code;
  logic [CNT_W-1:0] rep_cnt;     // flat windows still to emit after this one
  logic [CNT_W-1:0] run_len;
  logic             new_flat;
  logic             new_win;
  coef_t            win [WS];

  always_comb begin
    code     = decode_code(words_i[NCOMP-1]);
    new_flat = in_valid && code.is_code && code.flat;
    new_win  = in_valid && !(code.is_code && code.flat);
    run_len  = (code.count == '0) ? CNT_W'(1) : code.count;
    for (int p = 0; p < WS; p++) begin
      win[p] = '0;
      if (code.is_code) begin
        if (p < int'(NCOMP) - 1 && p < int'(WS) - int'(code.count)) win[p] = words_i[p];
      end else if (p < int'(NCOMP)) begin
        win[p] = words_i[p];
      end
    end
    stall_o     = (new_flat && run_len > CNT_W'(1)) || (rep_cnt > CNT_W'(1));
    run_start_o = new_flat;
  end

  function automatic sample_t sat_sample(input coef_t w);
    if (w > coef_t'(32767))  return sample_t'(16'h7fff);
    if (w < -coef_t'(32768)) return sample_t'(16'h8000);
    return sample_t'(w);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rep_cnt    <= '0;
      buf_valid  <= 1'b0;
      buf_bypass <= 1'b0;
      buf_flat   <= '0;
      for (int p = 0; p < WS; p++) buf_coef[p] <= '0;
    end else begin
      buf_valid <= new_win || new_flat || (rep_cnt != '0);
      if (new_flat) begin
        buf_bypass <= 1'b1;
        buf_flat   <= sat_sample(words_i[0]);
        rep_cnt    <= run_len - CNT_W'(1);
      end else if (rep_cnt != '0) begin
        buf_bypass <= 1'b1;
        rep_cnt    <= rep_cnt - CNT_W'(1);
      end else if (new_win) begin
        buf_bypass <= 1'b0;
        buf_coef   <= win;
      end
    end
  end

  // The sequencer must not issue a read while a flat run is replayed.
  a_no_read_during_run: assert property (@(posedge clk) disable iff (!rst_n)
    (rep_cnt != '0) |-> !in_valid);

endmodule
