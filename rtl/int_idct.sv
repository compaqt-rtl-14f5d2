// int_idct: the IDCT engine of the decompression pipeline. One window of WS
// integer-DCT coefficients in, one window of WS waveform samples out.
//
// The transform is the windowed integer DCT (int-DCT-W) of the HEVC video
// standard, as the architecture prescribes; the multiplications by matrix
// constants are shift-and-add networks (int_idct_core). Each output is
// rounded and shifted right by SHIFT = log2(S), S = 2^(6 + log2(WS)/2) being
// the constant scaling factor of the integer transform (8 for WS = 16), and
// saturated to a SAMPLE_W-bit DAC sample. The compressor stores
// y = round(T*x / S), so a window decodes back to x within rounding error.
//
// Timing: combinational. The architecture gives the engine a constant
// latency of one clock cycle; that cycle is the register of the IDCT buffer
// (idct_buffer) that follows it. WS = 8 and WS = 16 are the two sizes the
// architecture evaluates; for WS = 8 the exponent 6 + 1.5 is not an integer
// and SHIFT must be set by the user (7 with a compressor using S = 128).
module int_idct
  import compaqt_pkg::*;
#(
  parameter int unsigned WS       = compaqt_pkg::C_WS,
  parameter int unsigned IN_W     = compaqt_pkg::COEF_W,
  parameter int unsigned SHIFT    = 6 + $clog2(WS) / 2
) (
  input  logic signed [IN_W-1:0] coef_i [WS],
  output sample_t                samp_o [WS]
);

  logic signed [31:0] acc [WS];

  int_idct_core #(.N(WS), .IN_W(IN_W)) u_core (
    .y   (coef_i),
    .acc (acc)
  );

  for (genvar n = 0; n < WS; n++) begin : g_out
    assign samp_o[n] = round_sat(acc[n], SHIFT);
  end

endmodule
