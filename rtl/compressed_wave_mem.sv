// compressed_wave_mem: banked compressed waveform memory of one qubit.
//
// Every compressed window has the same width, NCOMP words, fixed by the
// worst-case window (three words for int-DCT-W: two coefficients and the RLE
// codeword). The words of a window are interleaved over NCOMP banks that are
// read in parallel at the same window address: bank k < NCOMP-1 holds the
// k-th coefficient of every window and bank NCOMP-1 its RLE codeword. A
// window that needs fewer coefficients stores zero in the unused bank. One
// read therefore yields a whole window per cycle, which the decompression
// engine expands to WS samples. Each bank word holds the I word in its upper
// and the Q word in its lower COEF_W bits (2 x 18 = 36 bits, the native
// width of an FPGA block RAM).
//
// Interface: host write port (bank, window address, {I,Q} word); read port
// (re_i, raddr_i) from the pulse sequencer. Timing: read data and rvalid_o
// one cycle after re_i.
module compressed_wave_mem
  import compaqt_pkg::*;
#(
  parameter int unsigned NCOMP = compaqt_pkg::C_NCOMP,
  parameter int unsigned DEPTH = compaqt_pkg::C_DEPTH,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned BW   = (NCOMP > 1) ? $clog2(NCOMP) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // host load port
  input  logic            we_i,
  input  logic [BW-1:0]   wbank_i,
  input  logic [AW-1:0]   waddr_i,
  input  coef_t           wdata_i_i,
  input  coef_t           wdata_q_i,
  // sequencer read port
  input  logic            re_i,
  input  logic [AW-1:0]   raddr_i,
  output logic            rvalid_o,
  output coef_t           i_words_o [NCOMP],
  output coef_t           q_words_o [NCOMP]
);

  for (genvar b = 0; b < NCOMP; b++) begin : g_bank
    logic [2*COEF_W-1:0] rdata;
    wave_bank #(.DEPTH(DEPTH), .W(2 * COEF_W)) u_bank (
      .clk,
      .we_i    (we_i && (wbank_i == BW'(b))),
      .waddr_i (waddr_i),
      .wdata_i ({wdata_i_i, wdata_q_i}),
      .re_i    (re_i),
      .raddr_i (raddr_i),
      .rdata_o (rdata)
    );
    assign i_words_o[b] = rdata[2*COEF_W-1:COEF_W];
    assign q_words_o[b] = rdata[COEF_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rvalid_o <= 1'b0;
    else        rvalid_o <= re_i;
  end

  a_raddr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    re_i |-> (raddr_i < AW'(DEPTH)));

endmodule
