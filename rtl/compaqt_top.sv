// compaqt_top: compressed waveform memory architecture for NQ qubits.
//
// NQ qubit control blocks (qubit_ctrl) run in parallel from a common time
// base. Each has its own banked compressed waveform memory and decompression
// engine and drives one I/Q DAC pair with one window of WS samples per
// fabric clock; the DAC runs WS times faster than the fabric (16x in the
// reference RFSoC platform), so one window per cycle is the full sampling
// rate. The host loads the compressed waveform library of every qubit and
// pushes timed pulse instructions; both ports carry a qubit index.
//
// NQ = 191 is the number of qubits the architecture reports an RFSoC can
// drive concurrently with WS = 16 (bounded by block-RAM bandwidth: three
// banks per waveform instead of sixteen). The time base counts fabric
// cycles from the start_i pulse.
//
// Timing: a pulse with start time T appears on dac_*[q] with dac_valid[q] at
// time T+4 (see qubit_ctrl).
module compaqt_top
  import compaqt_pkg::*;
#(
  parameter int unsigned NQ          = 191,
  parameter int unsigned WS          = compaqt_pkg::C_WS,
  parameter int unsigned NCOMP       = compaqt_pkg::C_NCOMP,
  parameter int unsigned DEPTH       = compaqt_pkg::C_DEPTH,
  parameter int unsigned INST_DEPTH  = 16,
  localparam int unsigned AW         = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned BW         = (NCOMP > 1) ? $clog2(NCOMP) : 1,
  localparam int unsigned QW         = (NQ > 1) ? $clog2(NQ) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start_i,      // restart the time base at 0
  output logic [31:0]   time_o,
  // host: waveform memory load
  input  logic          mem_we_i,
  input  logic [QW-1:0] mem_qubit_i,
  input  logic [BW-1:0] mem_bank_i,
  input  logic [AW-1:0] mem_addr_i,
  input  coef_t         mem_wdata_i_i,
  input  coef_t         mem_wdata_q_i,
  // host: instructions
  input  logic          inst_we_i,
  input  logic [QW-1:0] inst_qubit_i,
  input  inst_t         inst_i,
  output logic [NQ-1:0] inst_full_o,
  // DACs
  output logic [NQ-1:0] dac_valid_o,
  output sample_t       dac_i_o [NQ][WS],
  output sample_t       dac_q_o [NQ][WS],
  // status per qubit
  output logic [NQ-1:0] busy_o,
  output logic [NQ-1:0] mem_re_o,
  output logic [NQ-1:0] bypass_o,
  output logic [NQ-1:0] stall_o,
  output logic [NQ-1:0] late_o
);

  logic [31:0] time_q;

  always_ff @(posedge clk) begin
    if (!rst_n || start_i) time_q <= '0;
    else                   time_q <= time_q + 32'd1;
  end
  assign time_o = time_q;

  for (genvar q = 0; q < NQ; q++) begin : g_qubit
    qubit_ctrl #(.WS(WS), .NCOMP(NCOMP), .DEPTH(DEPTH), .INST_DEPTH(INST_DEPTH)) u_qc (
      .clk, .rst_n, .time_i(time_q),
      .mem_we_i      (mem_we_i && (mem_qubit_i == QW'(q))),
      .mem_bank_i, .mem_addr_i, .mem_wdata_i_i, .mem_wdata_q_i,
      .inst_we_i     (inst_we_i && (inst_qubit_i == QW'(q))),
      .inst_i,
      .inst_full_o   (inst_full_o[q]),
      .out_valid     (dac_valid_o[q]),
      .i_win         (dac_i_o[q]),
      .q_win         (dac_q_o[q]),
      .busy_o        (busy_o[q]),
      .mem_re_o      (mem_re_o[q]),
      .bypass_o      (bypass_o[q]),
      .stall_o       (stall_o[q]),
      .late_o        (late_o[q]));
  end

endmodule
