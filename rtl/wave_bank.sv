// wave_bank: one bank (one block RAM) of the compressed waveform memory.
//
// A simple dual-port RAM of DEPTH words of W bits: a write port for the host,
// which loads the waveforms after calibration, and a read port for the pulse
// sequencer. The read is synchronous: address and enable in cycle t, data in
// cycle t+1 (the output register holds its value while re_i is low), which is
// how FPGA block RAM and SRAM macros read. The array is written so that
// synthesis maps it to a RAM.
module wave_bank #(
  parameter int unsigned DEPTH = 288,
  parameter int unsigned W     = 36,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we_i,
  input  logic [AW-1:0] waddr_i,
  input  logic [W-1:0]  wdata_i,
  input  logic          re_i,
  input  logic [AW-1:0] raddr_i,
  output logic [W-1:0]  rdata_o
);

  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we_i) mem[waddr_i] <= wdata_i;
  end

  always_ff @(posedge clk) begin
    if (re_i) rdata_o <= mem[raddr_i];
  end

endmodule
