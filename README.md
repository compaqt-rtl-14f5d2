# Compressed waveform memory for qubit control

Every qubit in a superconducting quantum computer is driven by microwave pulses with a
device-specific shape. A controller keeps these shapes in on-chip memory and streams them to
DACs. On an RFSoC the DAC runs about 16 times faster than the FPGA fabric. As a result, every
qubit channel needs 16 I samples and 16 Q samples from block RAM in every fabric cycle. The
memory bandwidth, not the DACs, then limits how many qubits one device can drive.

This design stores the pulses compressed and expands them in hardware just before the DAC:

* Each pulse is cut into windows of 16 samples.
* Each window is transformed with the HEVC integer DCT.
* Only the few low-order coefficients that matter are kept. In practice that is at most
  two per window.
* The remaining high-order coefficients, which are all zero, are replaced by one run-length
  codeword.

A window is then at most three words instead of sixteen. Three narrow memory banks, read in
parallel, deliver a whole window per clock. A shift-and-add inverse DCT rebuilds the 16 samples
in one cycle. The bandwidth gain (16/3, about 5.3) is the gain in qubits per device. With a
window size of 16, the default build drives 191 qubit channels.

Flat-top pulses (ramp, long constant plateau, ramp) get one more trick. The plateau is stored as
a single entry, and the pipeline replays it for as many windows as the codeword says. During the
replay the memory is not read and the IDCT is not used. On an ASIC controller, that is where
the power is saved.

## Block diagram (one qubit channel)

```
 host ──► instruction buffer ──► pulse sequencer ──re/addr──► compressed waveform memory
          (FIFO, 16 entries)     (timed start,    ◄──stall──┐   (3 banks × 288 × {I,Q})
                                  read counter)              │            │ 3 words I, 3 words Q
                                                             │            ▼
                                                 ┌───────────┴── decompression engine ──────┐
                                                 │ RLE decoder ─► RLE buffer ─► int IDCT ─┐ │
                                                 │         └─────── bypass (flat) ───────►IDCT buffer ──► DAC (16 I + 16 Q / cycle)
                                                 └──────────────────────────────────────────┘
```

`compaqt_top` holds `NQ` copies of `qubit_ctrl`, a shared 32-bit time base and host ports that
address one qubit at a time. The DACs, the mixing and frequency multiplexing, and the host-side
compressor are outside the RTL. The DAC windows are top-level outputs, `dac_i_o[q][n]` and
`dac_q_o[q][n]`, where sample `n` is played `n`/16 of a cycle after the window starts.

## Compressed window format

A memory address holds one window, or one flat-top run, across `NCOMP` = 3 banks. Each bank
entry is 36 bits: an 18-bit I word and an 18-bit Q word. The 18-bit words are read as follows
(bank 0 first):

| case | bank 0 | bank 1 | bank 2 |
|---|---|---|---|
| 2 coefficients | y0 | y1 | codeword, count = 14 |
| 1 coefficient | y0 | 0 (unused) | codeword, count = 15 |
| all zero | 0 (unused) | 0 (unused) | codeword, count = 16 |
| 3 coefficients, no zeros | y0 | y1 | y2 (no signature) |
| flat-top run | constant sample | 0 (unused) | codeword, flat = 1, count = windows |

The codeword is the last word of the window (bank `NCOMP-1`). Its layout:

```
 17      12  11   10                0
 ┌────────┬────┬───────────────────┐
 │ 100000 │flat│      count        │
 └────────┴────┴───────────────────┘
```

* The signature `100000` in the top six bits marks the word as a codeword.
  A coefficient therefore must not fall in the most negative 1/64 of the 18-bit range (below
  −122 880). That never happens for 16-bit samples: the largest DC coefficient of a full-scale
  window is 4 × 32 767.
* When `flat = 0`, `count` is the number of trailing zero coefficients. Window position `p`
  takes word `p` when `p < NCOMP−1` and `p < 16 − count`. Every other position gets 0.
* When `flat = 1`, word 0 is a time-domain sample. It is played on all 16 samples of `count`
  consecutive windows, with count 0 treated as 1. An 11-bit count covers plateaus up to 2047
  windows, about 32 768 DAC samples.
* If the last word has no signature, all three words are coefficients y0..y2.

I and Q must share the window structure. That means the same number of coefficients, and the
flat-top runs at the same addresses. This matches how the compressor keeps the two channels the
same size. The decompression engine asserts this rule.

## Inverse integer DCT

For window size `N` the inverse transform is

```
x[n] = sat16( (Σ_k T_N[k][n] · y[k] + 2^(s−1)) >>> s ),   s = 6 + log2(N)/2  (8 for N = 16)
```

`T_N` is the HEVC integer DCT matrix. Its entries are ±{64, 90, 89, 87, 83, 80, 75, 70, 57,
50, 43, 36, 25, 18, 9}. The entry for row `k`, column `n` is the constant for angle
`(2n+1)·k·(16/N)` in steps of π/32, folded into the first quadrant with the matching sign
(`compaqt_pkg::hevc_t`). The compressor has to produce `y = round(T_N · x / 2^s)`, so that
the 2^s scaling cancels.

`int_idct_core` is the usual even/odd ("partial butterfly") factorisation, written
recursively:

* The even coefficients y[0], y[2], … form an `N/2`-point inverse. That inner transform is
  another instance of the same module.
* The odd coefficients give `o[n] = Σ T_N[2k+1][n]·y[2k+1]` for `n < N/2`.
* The outputs are `e[n] + o[n]` and `e[n] − o[n]` (the latter at `N−1−n`).

Every product is by a constant, and `shift_add_mul` turns each one into one shifted copy per
set bit. After elaboration the block is a pure adder tree with no multipliers. The core keeps
32-bit sums, and `int_idct` rounds and saturates them. The transform always runs at full
size. Zero coefficients from the RLE stage are ordinary inputs, so one datapath serves windows
with 0, 1, 2 or 3 coefficients.

The transform is combinational. The registered RLE buffer before it and the IDCT buffer after
it give it exactly one clock cycle.

## Pipeline and timing

One qubit channel, with P the cycle in which the time base equals the instruction's `t_start`:

| cycle | stage |
|---|---|
| P | the sequencer pops the instruction (a one-cycle issue decision) |
| P+1 | first memory read (`mem_re_o`), all three banks at one address |
| P+2 | bank data valid; the RLE decoder examines it |
| P+3 | RLE buffer holds the expanded window; the IDCT computes |
| P+4 | IDCT buffer holds 16 I + 16 Q samples: `dac_valid_o` |

Timing rules:

* From then on, one window per cycle comes out for as long as the pulse lasts.
* A second instruction whose start time has already come is popped in the cycle of the last
  read of the previous pulse. Consecutive pulses therefore play with no gap.
* An instruction popped after its start time raises `late_o` and plays at once.
* The instruction format is `{t_start[31:0], addr[15:0], nent[15:0]}`, where `nent` is the
  number of memory entries, not the number of windows.

### Flat-top runs and stalls

When a flat entry with run length R > 1 arrives, the decoder loads a counter with R − 1. It
holds `stall_o` high until the last replayed window is in the RLE buffer. The sequencer sees
the stall in the same cycle and issues no read, so the next entry arrives exactly after the
run. While the run plays, `bypass_o` is high:

* The IDCT buffer takes the constant sample on all 16 lanes.
* The RLE buffer keeps its coefficient value, so the IDCT inputs do not toggle.

There is no bubble at either end of a plateau. A pulse of E entries that holds runs R₁, R₂, …
lasts `E − (number of runs) + ΣRᵢ` windows but costs only E reads.

## Compressed waveform memory

`compressed_wave_mem` consists of `NCOMP` instances of `wave_bank`, a simple dual-port RAM with
a synchronous, enabled read. A read returns one word from every bank at the same address. The
host writes one bank at a time, selected by `mem_bank_i`.

The depth of 288 windows comes from 18 KB of uncompressed pulse data per qubit. That is the
single-qubit, two-qubit and readout pulses of one IBM-style device: 4608 I/Q samples, or 288
windows. Because every window fits one entry, the compressed library always fits, and flat-top
runs leave entries free. Compression reduces bandwidth, not the number of addresses.

## Departures from the source architecture and design choices

* **Codeword bit layout, flat-top encoding, 18-bit coefficients, 16-bit samples per
  channel.** The architecture names the fields but not their widths.
* **Whole-window plateaus.** A flat run counts whole windows, so a plateau starts and ends on a
  window boundary. The ramps around it are ordinary windows.
* **Data layout.**
  * I and Q share one 36-bit bank word.
  * The instruction buffer is a 16-deep FIFO with a timed-start instruction.
  * The time base is restarted by `start_i`.
  * Synchronous active-low reset.
  * A qubit's outputs are zero while it is idle.
* **Window size.** The default is 16, which is what the scaling numbers are based on. An
  8-point version is a parameter change (`WS=8`). The scaling exponent 6 + log2(8)/2 is not an
  integer, though, so `SHIFT` must be set by hand (7).
* **Channel model.** Each qubit channel has its own I/Q outputs. Frequency multiplexing several
  qubits onto one DAC is not modelled, and 191 is an upper bound set by memory bandwidth, not
  by the number of DACs.
* **ASIC front end.** The ASIC variant, where a single fast SRAM is read one word per cycle and
  a window is assembled whenever a codeword appears, is not included. Only the banked form is
  built.

## Verification

Each block has a self-checking testbench in `tb/`, and `compaqt_tb_pkg` holds the shared test
model:

* a literal HEVC 16-point table;
* a reference inverse that evaluates the matrix product directly from that table;
* random window generators.

The testbenches compare every DAC sample against that reference and check cycle counts
against the latencies above:

* `tb_int_idct`: random, extreme and single-coefficient windows.
* `tb_rle_decoder`: zero expansion, flat runs and stall timing.
* `tb_idct_buffer`, `tb_decomp_engine`, `tb_compressed_wave_mem`, `tb_inst_buffer`,
  `tb_pulse_sequencer`: one each for the block of the same name.
* `tb_qubit_ctrl`: one full channel with random pulses, flat-tops, back-to-back and late
  starts, checking that a pulse starts at P+4 and that reads are fewer than windows.
* `tb_compaqt_top`: end to end, all qubits playing at once. It counts each mechanism (0/1/2
  coefficient windows, bypass, stalls, back-to-back pulses, late start, full instruction
  buffer, all channels active) and fails if one never occurs.
* `tb_workload_library`: one channel whose 288 entries are filled completely. The entries
  hold a 1008-sample two-qubit-style pulse with a flat top, a 480-sample (100 ns) flat-top pulse
  and random windows. The test plays the whole memory and both pulses, and checks every sample,
  the 16 samples per cycle rate, and one read per entry.

Largest size simulated: the end-to-end test runs 4 qubit channels with every other parameter
at its default (WS 16, three banks of 288). The channels are independent copies, and a
191-channel build takes over 20 minutes to compile in Verilator. The full 191-channel top has
been linted and elaborated but is not part of the regular test run.

To simulate a testbench with Verilator 5:

```
verilator --binary --timing -Wno-fatal --top-module tb_compaqt_top \
    rtl/compaqt_pkg.sv rtl/wave_bank.sv rtl/compressed_wave_mem.sv rtl/int_idct_core.sv \
    rtl/int_idct.sv rtl/rle_decoder.sv rtl/idct_buffer.sv rtl/decomp_engine.sv \
    rtl/inst_buffer.sv rtl/pulse_sequencer.sv rtl/qubit_ctrl.sv rtl/compaqt_top.sv \
    tb/compaqt_tb_pkg.sv tb/tb_compaqt_top.sv
./obj_dir/Vtb_compaqt_top
```

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`. For a smaller block, list
the package files and the modules it uses, then the testbench, and change `--top-module`.
