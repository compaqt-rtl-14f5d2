// idct_buffer: the register between the IDCT engine and the DAC, holding
// one decompressed window of WS samples, with the adaptive-decompression
// bypass.
//
// Each cycle in which the RLE buffer holds a window (in_valid), the buffer
// loads either the IDCT result (bypass = 0) or, for a flat-top segment
// (bypass = 1), the constant sample replicated over all WS positions, which
// is the path that skips the IDCT. When nothing is played the buffer outputs
// zeros, the DAC's idle level (this design's choice). The DAC, which runs WS
// times faster than this clock, consumes one window per cycle.
//
// Timing: one cycle. Inputs in cycle t, win_o/win_valid in cycle t+1. This
// register is the one-cycle latency of the IDCT stage.
module idct_buffer
  import compaqt_pkg::*;
#(
  parameter int unsigned WS = compaqt_pkg::C_WS
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  logic    bypass,
  input  sample_t flat_i,
  input  sample_t idct_i   [WS],
  output logic    win_valid,
  output sample_t win_o    [WS]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win_valid <= 1'b0;
      for (int n = 0; n < WS; n++) win_o[n] <= '0;
    end else begin
      win_valid <= in_valid;
      for (int n = 0; n < WS; n++) begin
        if (!in_valid)   win_o[n] <= '0;
        else if (bypass) win_o[n] <= flat_i;
        else             win_o[n] <= idct_i[n];
      end
    end
  end

endmodule
