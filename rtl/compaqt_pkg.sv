// compaqt_pkg: types, constants and helper functions shared by the
// compressed-waveform decompression pipeline.
//
// Word formats (this design's own choice; the source architecture only
// says that the run-length codeword carries "a signature identifying it
// as the RLE codeword" and "the number of zeros that have been encoded"):
//
//   coefficient word  : COEF_W-bit two's complement integer-DCT coefficient
//                       (or, in a flat-top window, a time-domain sample).
//   RLE codeword      : [COEF_W-1 -: SIG_W] = RLE_SIG  signature
//                       [CNT_W]             = flat    1: flat-top run
//                       [CNT_W-1:0]         = count   zeros in the window, or
//                                                     number of flat windows
//
// The signature occupies the most negative 1/64 of the coefficient range,
// so the compressor must clamp coefficients above that range (a
// coefficient never needs it: the largest DC term of a full-scale window
// is 4*32767, see int_idct).
//
// Integer DCT: the N-point matrix is the HEVC one, T_N[k][n], whose
// magnitudes are the HEVC constants 64,90,89,87,83,80,75,70,64,57,50,43,
// 36,25,18,9 indexed by the angle (2n+1)k*pi/(2N) in steps of pi/32.
// The inverse transform is x[n] = (sum_k T_N[k][n] y[k] + 2^(SHIFT-1)) >>> SHIFT
// with SHIFT = 6 + log2(N)/2 (8 for N = 16).
package compaqt_pkg;

  // Configuration of the evaluated design point: int-DCT-W, window of 16,
  // worst case three compressed words per window (two coefficients plus
  // the RLE codeword).
  localparam int unsigned C_WS     = 16;  // window size
  localparam int unsigned C_NCOMP  = 3;   // compressed words (banks) per window
  localparam int unsigned SAMPLE_W = 16;  // DAC sample width per I or Q channel
  localparam int unsigned COEF_W   = 18;  // stored coefficient width (BRAM x36 = I+Q)
  localparam int unsigned SIG_W    = 6;   // signature width of the RLE codeword
  localparam int unsigned CNT_W    = COEF_W - SIG_W - 1;  // 11-bit count
  localparam logic [SIG_W-1:0] RLE_SIG = 6'b100000;

  typedef logic signed [COEF_W-1:0]   coef_t;
  typedef logic signed [SAMPLE_W-1:0] sample_t;

  // Depth of one memory bank in windows: the 18 KB of uncompressed
  // waveforms one qubit needs (32-bit I+Q samples) are 4608 samples, i.e.
  // 288 windows of 16; every window, and every flat-top run, takes one
  // entry in each bank.
  localparam int unsigned C_DEPTH  = 288;

  // Timed pulse instruction (this design's format): play the `nent`
  // compressed entries starting at window address `addr` when the global
  // time, in fabric clock cycles, reaches `t_start`.
  typedef struct packed {
    logic [31:0] t_start;
    logic [15:0] addr;
    logic [15:0] nent;
  } inst_t;

  // Decoded RLE codeword.
  typedef struct packed {
    logic             is_code;  // signature matched
    logic             flat;     // flat-top run (bypass the IDCT)
    logic [CNT_W-1:0] count;    // zeros in window / flat windows
  } rle_code_t;

  function automatic rle_code_t decode_code(input coef_t w);
    rle_code_t c;
    c.is_code = (w[COEF_W-1 -: SIG_W] == RLE_SIG);
    c.flat    = w[CNT_W];
    c.count   = w[CNT_W-1:0];
    return c;
  endfunction

  function automatic coef_t make_code(input logic flat, input logic [CNT_W-1:0] count);
    coef_t w;
    w = {RLE_SIG, flat, count};
    return w;
  endfunction

  // HEVC integer-DCT constant for the angle m*pi/32, m in 0..16.
  function automatic int hevc_mag(input int m);
    case (m)
      0: return 64;   1: return 90;   2: return 89;   3: return 87;
      4: return 83;   5: return 80;   6: return 75;   7: return 70;
      8: return 64;   9: return 57;  10: return 50;  11: return 43;
     12: return 36;  13: return 25;  14: return 18;  15: return 9;
      default: return 0;
    endcase
  endfunction

  // Entry T_N[k][n] of the HEVC N-point forward matrix (N = 1..16).
  function automatic int hevc_t(input int n_pt, input int k, input int n);
    int m;
    m = (((2 * n + 1) * k * (16 / n_pt)) % 64);
    if (m > 32) m = 64 - m;
    if (m > 16) return -hevc_mag(32 - m);
    return hevc_mag(m);
  endfunction

  // Multiply by a constant with shifts and adds only: one shifted copy of x
  // for every set bit of |c|. With a constant c this elaborates to an adder
  // tree, which is how the integer IDCT avoids multipliers.
  function automatic logic signed [31:0] shift_add_mul(input logic signed [31:0] x,
                                                       input int c);
    logic signed [31:0] acc;
    int unsigned mag;
    acc = '0;
    mag = (c < 0) ? -c : c;
    for (int b = 0; b < 8; b++) begin
      if (mag[b]) acc = acc + (x <<< b);
    end
    return (c < 0) ? -acc : acc;
  endfunction

  // Round-and-saturate a 32-bit accumulator to a DAC sample.
  function automatic sample_t round_sat(input logic signed [31:0] acc, input int shift);
    logic signed [31:0] r;
    r = (acc + (32'sd1 <<< (shift - 1))) >>> shift;
    if (r > 32'sd32767)  return sample_t'(16'h7fff);
    if (r < -32'sd32768) return sample_t'(16'h8000);
    return sample_t'(r);
  endfunction

endpackage
