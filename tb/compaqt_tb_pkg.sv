// compaqt_tb_pkg: reference models shared by the testbenches.
//
// The reference IDCT is a plain matrix-vector product with the HEVC 16-point
// matrix typed in from the standard (not generated from the rules the RTL
// uses), followed by the rounding shift by 8 and saturation. The window
// type describes one compressed window the way a compressor would emit it.
package compaqt_tb_pkg;
  import compaqt_pkg::*;

  localparam int TWS = 16;

  const int T16 [16][16] = '{
    '{64, 64, 64, 64, 64, 64, 64, 64, 64, 64, 64, 64, 64, 64, 64, 64},
    '{90, 87, 80, 70, 57, 43, 25,  9, -9,-25,-43,-57,-70,-80,-87,-90},
    '{89, 75, 50, 18,-18,-50,-75,-89,-89,-75,-50,-18, 18, 50, 75, 89},
    '{87, 57,  9,-43,-80,-90,-70,-25, 25, 70, 90, 80, 43, -9,-57,-87},
    '{83, 36,-36,-83,-83,-36, 36, 83, 83, 36,-36,-83,-83,-36, 36, 83},
    '{80,  9,-70,-87,-25, 57, 90, 43,-43,-90,-57, 25, 87, 70, -9,-80},
    '{75,-18,-89,-50, 50, 89, 18,-75,-75, 18, 89, 50,-50,-89,-18, 75},
    '{70,-43,-87,  9, 90, 25,-80,-57, 57, 80,-25,-90, -9, 87, 43,-70},
    '{64,-64,-64, 64, 64,-64,-64, 64, 64,-64,-64, 64, 64,-64,-64, 64},
    '{57,-80,-25, 90, -9,-87, 43, 70,-70,-43, 87,  9,-90, 25, 80,-57},
    '{50,-89, 18, 75,-75,-18, 89,-50,-50, 89,-18,-75, 75, 18,-89, 50},
    '{43,-90, 57, 25,-87, 70,  9,-80, 80, -9,-70, 87,-25,-57, 90,-43},
    '{36,-83, 83,-36,-36, 83,-83, 36, 36,-83, 83,-36,-36, 83,-83, 36},
    '{25,-70, 90,-80, 43,  9,-57, 87,-87, 57, -9,-43, 80,-90, 70,-25},
    '{18,-50, 75,-89, 89,-75, 50,-18,-18, 50,-75, 89,-89, 75,-50, 18},
    '{ 9,-25, 43,-57, 70,-80, 87,-90, 90,-87, 80,-70, 57,-43, 25, -9}};

  // One channel of one compressed window: either nz (0..2) leading
  // coefficients and WS-nz encoded zeros, or a flat-top run of `run`
  // windows at time-domain value `val`.
  typedef struct {
    bit flat;
    int nz;
    int c0;
    int c1;
    int val;
    int run;
  } twin_t;

  function automatic int sat16(longint r);
    if (r > 32767) return 32767;
    if (r < -32768) return -32768;
    return int'(r);
  endfunction

  // Reference sample n of the decompressed (non-flat) window.
  function automatic int ref_sample(twin_t w, int n);
    longint acc = 0;
    if (w.flat) return sat16(longint'(w.val));
    if (w.nz > 0) acc += longint'(T16[0][n]) * w.c0;
    if (w.nz > 1) acc += longint'(T16[1][n]) * w.c1;
    return sat16((acc + 128) >>> 8);
  endfunction

  // The three bank words of the window.
  function automatic coef_t word(twin_t w, int b);
    if (b == 2) return w.flat ? make_code(1'b1, CNT_W'(w.run)) : make_code(1'b0, CNT_W'(TWS - w.nz));
    if (w.flat) return (b == 0) ? coef_t'(w.val) : '0;
    if (b == 0) return (w.nz > 0) ? coef_t'(w.c0) : '0;
    return (w.nz > 1) ? coef_t'(w.c1) : '0;
  endfunction

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(0, hi - lo));
  endfunction

  // Random non-flat window with the nz distribution of the worst case.
  function automatic twin_t rand_win();
    twin_t w;
    w.flat = 0;
    w.nz   = rnd(0, 2);
    w.c0   = rnd(-100000, 100000);
    w.c1   = rnd(-30000, 30000);
    w.val  = 0;
    w.run  = 1;
    return w;
  endfunction

  function automatic twin_t flat_win(int val, int run);
    twin_t w;
    w.flat = 1; w.nz = 1; w.c0 = 0; w.c1 = 0; w.val = val; w.run = run;
    return w;
  endfunction

endpackage
