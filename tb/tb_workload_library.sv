// tb_workload_library: one qubit channel at its default size holding and
// playing a complete per-qubit pulse library.
//
// The 288 window entries of the memory are filled completely: a 1000-sample
// cross-resonance style pulse (63 windows: 8 ramp windows, one flat-top
// entry of 47 windows, 8 ramp windows), a 100 ns flat-top pulse at a DAC rate
// of 16 samples per fabric cycle (30 windows: 3 ramp, one flat entry of 24,
// 3 ramp), and random single-qubit and readout windows (0, 1 or 2
// coefficients each) for the rest. The testbench then plays the whole
// memory as one pulse, then the two flat-top pulses, and checks:
//   - every DAC sample against the reference IDCT,
//   - the rate: a pulse of W windows delivers exactly one window of 16 I and
//     16 Q samples in each of W consecutive cycles, starting 4 cycles after
//     its start time,
//   - the number of memory reads: one per entry, none during a flat-top run.
// The pulse shapes are random stand-ins of the right length; the sizes (18 KB
// per qubit, 1000+ sample two-qubit pulses, flat-top pulses) are those the
// memory is sized for.
module tb_workload_library;
  import compaqt_pkg::*;
  import compaqt_tb_pkg::*;

  localparam int WS = 16, NCOMP = 3, DEPTH = 288;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic [31:0] tnow = '0;
  logic mem_we = 0, inst_we = 0;
  logic [1:0] mem_bank = '0;
  logic [AW-1:0] mem_addr = '0;
  coef_t wdi = '0, wdq = '0;
  inst_t inst = '0;
  logic full, dvalid, busy, mre, bypass, stall, late;
  sample_t di [WS];
  sample_t dq [WS];

  qubit_ctrl dut (
    .clk, .rst_n, .time_i(tnow),
    .mem_we_i(mem_we), .mem_bank_i(mem_bank), .mem_addr_i(mem_addr),
    .mem_wdata_i_i(wdi), .mem_wdata_q_i(wdq),
    .inst_we_i(inst_we), .inst_i(inst), .inst_full_o(full),
    .out_valid(dvalid), .i_win(di), .q_win(dq),
    .busy_o(busy), .mem_re_o(mre), .bypass_o(bypass), .stall_o(stall), .late_o(late));

  always #5 clk = ~clk;
  always @(posedge clk) tnow <= tnow + 1;

  typedef struct { twin_t i; twin_t q; } pair_t;
  typedef struct { twin_t i; twin_t q; int due; } exp_t;

  pair_t lib [DEPTH];
  exp_t  expq [$];
  int checks = 0, failures = 0;
  int cnt_reads = 0, cnt_windows = 0, cnt_bypass = 0;

  function automatic pair_t rand_pair();
    pair_t w;
    w.i = rand_win(); w.q = rand_win(); w.q.nz = w.i.nz;
    return w;
  endfunction

  // Flat-top pulse at address a: ramp windows, one flat entry, ramp windows.
  function automatic int put_flat_top(int a, int ramp, int run);
    int v;
    v = rnd(8000, 30000);
    for (int k = 0; k < ramp; k++) lib[a + k] = rand_pair();
    lib[a + ramp].i = flat_win(v, run);
    lib[a + ramp].q = flat_win(rnd(-2000, 2000), run);
    for (int k = 0; k < ramp; k++) lib[a + ramp + 1 + k] = rand_pair();
    return 2 * ramp + 1;
  endfunction

  // Queue the expected windows of a pulse; returns its length in windows.
  function automatic int expect_pulse(int addr, int nent, int due);
    exp_t e;
    int n;
    n = 0;
    for (int a = addr; a < addr + nent; a++) begin
      int r;
      r = lib[a].i.flat ? lib[a].i.run : 1;
      for (int k = 0; k < r; k++) begin
        e.i = lib[a].i; e.q = lib[a].q; e.due = due + n;
        expq.push_back(e);
        n++;
      end
    end
    return n;
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (mre)    cnt_reads++;
      if (bypass) cnt_bypass++;
      checks++;
      if (mre && stall) begin failures++; $display("FAIL read during a flat-top run"); end
      if (dvalid) begin
        exp_t e;
        cnt_windows++;
        checks++;
        if (expq.size() == 0) begin
          failures++; $display("FAIL unexpected window at %0d", tnow);
        end else begin
          e = expq.pop_front();
          if (e.due != int'(tnow)) begin
            failures++;
            if (failures < 20) $display("FAIL window due %0d came %0d", e.due, tnow);
          end
          for (int n = 0; n < WS; n++) begin
            checks += 2;
            if (int'(di[n]) != ref_sample(e.i, n) || int'(dq[n]) != ref_sample(e.q, n)) begin
              failures++;
              if (failures < 20) $display("FAIL n=%0d I %0d/%0d Q %0d/%0d", n,
                di[n], ref_sample(e.i, n), dq[n], ref_sample(e.q, n));
            end
          end
        end
      end
    end
  end

  task automatic play(int addr, int nent, int t_start, int exp_windows);
    int w, reads0, win0;
    reads0 = cnt_reads; win0 = cnt_windows;
    while (int'(tnow) < t_start - 20) @(negedge clk);
    inst_we = 1;
    inst.t_start = 32'(t_start); inst.addr = 16'(addr); inst.nent = 16'(nent);
    w = expect_pulse(addr, nent, t_start + 4);
    @(negedge clk);
    inst_we = 0;
    checks++;
    if (w != exp_windows) begin failures++; $display("FAIL pulse length %0d, want %0d", w, exp_windows); end
    while (expq.size() != 0 && int'(tnow) < t_start + w + 40) @(negedge clk);
    repeat (4) @(negedge clk);
    checks += 2;
    if (cnt_windows - win0 != w) begin
      failures++; $display("FAIL %0d windows played, want %0d", cnt_windows - win0, w);
    end
    if (cnt_reads - reads0 != nent) begin
      failures++; $display("FAIL %0d reads, want %0d", cnt_reads - reads0, nent);
    end
    $display("pulse @%0d: %0d entries, %0d windows (%0d samples per channel), %0d reads",
      addr, nent, w, w * WS, cnt_reads - reads0);
  endtask

  initial begin
    int a, cr_a, cr_n, ft_a, ft_n, total;
    repeat (3) @(negedge clk);
    rst_n = 1;
    cr_a = 0;
    cr_n = put_flat_top(cr_a, 8, 47);
    ft_a = cr_n;
    ft_n = put_flat_top(ft_a, 3, 24);
    for (a = ft_a + ft_n; a < DEPTH; a++) lib[a] = rand_pair();
    total = 0;
    for (a = 0; a < DEPTH; a++) total += lib[a].i.flat ? lib[a].i.run : 1;
    for (a = 0; a < DEPTH; a++)
      for (int b = 0; b < NCOMP; b++) begin
        mem_we = 1; mem_bank = 2'(b); mem_addr = AW'(a);
        wdi = word(lib[a].i, b); wdq = word(lib[a].q, b);
        @(negedge clk);
      end
    mem_we = 0;
    play(0, DEPTH, int'(tnow) + 30, total);
    play(cr_a, cr_n, int'(tnow) + 30, 63);
    play(ft_a, ft_n, int'(tnow) + 30, 30);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d windows never came", expq.size()); end
    checks++;
    if (cnt_bypass == 0) begin failures++; $display("FAIL no flat-top bypass"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
