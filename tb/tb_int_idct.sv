// tb_int_idct: self-checking testbench of the integer IDCT engine (WS = 16).
//
// Reference 1: a direct 16x16 matrix-vector product with the HEVC matrix
// typed in below from the standard, then the same rounding shift by 8 and
// saturation; compared bit-exactly on random and on structured windows.
// Reference 2: a window of a smooth (Gaussian) waveform is transformed with
// a real-valued DCT scaled by 1/S and rounded, the engine must return the
// waveform within a few LSB.
module tb_int_idct;
  import compaqt_pkg::*;

  localparam int WS = 16;
  localparam int SH = 8;

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

  logic signed [COEF_W-1:0] coef [WS];
  sample_t                  samp [WS];
  int checks = 0, failures = 0;

  int_idct #(.WS(WS)) dut (.coef_i(coef), .samp_o(samp));

  function automatic int ref_out(int n);
    longint acc = 0;
    longint r;
    for (int k = 0; k < WS; k++) acc += longint'(T16[k][n]) * longint'(coef[k]);
    r = (acc + (1 << (SH - 1))) >>> SH;
    if (r > 32767) r = 32767;
    if (r < -32768) r = -32768;
    return int'(r);
  endfunction

  task automatic check_exact(string what);
    #1;
    for (int n = 0; n < WS; n++) begin
      checks++;
      if (int'(samp[n]) != ref_out(n)) begin
        failures++;
        if (failures < 10)
          $display("FAIL %s n=%0d got %0d exp %0d", what, n, samp[n], ref_out(n));
      end
    end
  endtask

  real x [WS];
  real pi = 3.14159265358979;

  initial begin
    // impulses in every coefficient position
    for (int k = 0; k < WS; k++) begin
      foreach (coef[i]) coef[i] = '0;
      coef[k] = 18'sd1000;
      check_exact("impulse");
      coef[k] = -18'sd777;
      check_exact("neg impulse");
    end
    // random full windows (kept in the legal range)
    for (int t = 0; t < 200; t++) begin
      foreach (coef[i]) coef[i] = COEF_W'($signed($urandom_range(0, 60000)) - 30000);
      check_exact("random");
    end
    // large DC terms: exercise saturation
    foreach (coef[i]) coef[i] = '0;
    coef[0] = 18'sd131000; check_exact("dc max");
    coef[0] = -18'sd131000; check_exact("dc min");
    // round trip of a smooth Gaussian window through a real DCT
    for (int t = 0; t < 20; t++) begin
      real amp, ctr, sig;
      amp = 1000.0 + 1500.0 * t;
      ctr = 2.0 + 0.6 * t;
      sig = 3.0 + 0.2 * t;
      for (int n = 0; n < WS; n++) x[n] = amp * $exp(-((n - ctr) ** 2) / (2.0 * sig * sig));
      for (int k = 0; k < WS; k++) begin
        real s, ck;
        s = 0.0;
        ck = (k == 0) ? $sqrt(1.0 / WS) : $sqrt(2.0 / WS);
        for (int n = 0; n < WS; n++) s += x[n] * $cos(pi * (2 * n + 1) * k / (2.0 * WS));
        // orthonormal DCT times 64*sqrt(WS)/S = 1
        coef[k] = COEF_W'($rtoi(s * ck + ((s * ck) >= 0 ? 0.5 : -0.5)));
      end
      #1;
      for (int n = 0; n < WS; n++) begin
        real err;
        err = real'(samp[n]) - x[n];
        checks++;
        // integer-matrix approximation error: below 1 % of the amplitude
        if (err > 0.01 * amp + 2.0 || err < -(0.01 * amp + 2.0)) begin
          failures++;
          $display("FAIL round trip t=%0d n=%0d got %0d exp %f", t, n, samp[n], x[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
