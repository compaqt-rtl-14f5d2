// tb_decomp_engine: self-checking testbench of the decompression engine
// (RLE decoder, integer IDCT, IDCT buffer and bypass, I and Q channels).
//
// A sequencer/memory model streams compressed windows (0, 1 or 2
// coefficients plus codeword) and flat-top runs, honouring stall_o. The
// expected I and Q samples come from the reference IDCT in compaqt_tb_pkg.
// Checked: every sample, the latency (a window read in cycle t is on the
// output two cycles after its words reach the engine input), the
// throughput of one window per cycle, and that the IDCT is bypassed for
// every flat window.
module tb_decomp_engine;
  import compaqt_pkg::*;
  import compaqt_tb_pkg::*;

  localparam int WS = 16, NCOMP = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  coef_t iw [NCOMP];
  coef_t qw [NCOMP];
  logic stall, out_valid, bypass, run_start;
  sample_t iwin [WS];
  sample_t qwin [WS];

  decomp_engine #(.WS(WS), .NCOMP(NCOMP)) dut (
    .clk, .rst_n, .in_valid, .i_words(iw), .q_words(qw), .stall_o(stall),
    .out_valid, .i_win(iwin), .q_win(qwin), .bypass_o(bypass), .run_start_o(run_start));

  always #5 clk = ~clk;

  typedef struct { twin_t i; twin_t q; } pair_t;
  typedef struct { twin_t i; twin_t q; int due; } exp_t;
  pair_t stim [$];
  exp_t  expq [$];
  int checks = 0, failures = 0, cyc = 0, outs = 0, bypassed = 0, flat_windows = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && stim.size() > 0 && !stall) begin
      pair_t p;
      exp_t e;
      p = stim.pop_front();
      for (int b = 0; b < NCOMP; b++) begin
        iw[b] <= word(p.i, b);
        qw[b] <= word(p.q, b);
      end
      in_valid <= 1'b1;
      // words visible in cycle cyc+1, first output window in cyc+3
      for (int r = 0; r < (p.i.flat ? p.i.run : 1); r++) begin
        e.i = p.i; e.q = p.q; e.due = cyc + 3 + r;
        expq.push_back(e);
      end
    end else begin
      in_valid <= 1'b0;
    end
  end

  always @(posedge clk) begin
    if (rst_n && bypass) bypassed++;
    if (rst_n && out_valid) begin
      exp_t e;
      outs++;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL unexpected window"); end
      else begin
        e = expq.pop_front();
        if (e.due != cyc) begin
          failures++; $display("FAIL window due %0d came %0d", e.due, cyc);
        end
        for (int n = 0; n < WS; n++) begin
          checks += 2;
          if (int'(iwin[n]) != ref_sample(e.i, n) || int'(qwin[n]) != ref_sample(e.q, n)) begin
            failures++;
            if (failures < 10) $display("FAIL n=%0d I %0d/%0d Q %0d/%0d flat=%0d", n,
              iwin[n], ref_sample(e.i, n), qwin[n], ref_sample(e.q, n), e.i.flat);
          end
        end
      end
    end
  end

  initial begin
    iw = '{default: '0};
    qw = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < 400; k++) begin
      pair_t p;
      if (k % 9 == 4) begin
        int run;
        run = rnd(1, 8);
        p.i = flat_win(rnd(-32768, 32767), run);
        p.q = flat_win(rnd(-32768, 32767), run);
        flat_windows += run;
      end else begin
        p.i = rand_win();
        p.q = rand_win();
        p.q.nz = p.i.nz;
      end
      stim.push_back(p);
    end
    while (stim.size() != 0) @(posedge clk);
    repeat (8) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d windows missing", expq.size()); end
    checks++;
    if (bypassed != flat_windows) begin
      failures++; $display("FAIL bypassed %0d of %0d flat windows", bypassed, flat_windows);
    end
    $display("windows=%0d flat windows=%0d", outs, flat_windows);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
