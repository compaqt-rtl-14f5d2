// tb_compaqt_top: end-to-end testbench of the whole design, at 4 qubit
// channels instead of 191 to keep the simulator build short (the channels
// are identical copies); everything else at its default (WS = 16, three
// banks of 288 windows per qubit).
//
// Every qubit gets its own compressed library: a "Gaussian" pulse of random
// windows with 0, 1 or 2 coefficients, and a flat-top pulse (ramp windows,
// one flat-top entry of several windows, ramp windows). After the time
// base is restarted, every qubit plays the Gaussian pulse and, back to back,
// the flat-top pulse, all qubits at the same time; qubit 0 gets an extra
// pulse whose start time has already passed (late start) and qubit 1 enough
// instructions to fill its instruction buffer. Each qubit's DAC windows are
// checked sample by sample against the reference IDCT and cycle by cycle
// against the expected start time (start + 4, or right after the previous
// pulse). The testbench counts each mechanism of the design and fails if
// one never happens: zero-run expansion with 0/1/2 coefficients, flat-top
// bypass of the IDCT, reads stalled during a flat-top run, back-to-back
// pulses, late start, full instruction buffer, all qubits playing at once.
module tb_compaqt_top;
  import compaqt_pkg::*;
  import compaqt_tb_pkg::*;

  localparam int NQ = 4, WS = 16, NCOMP = 3, DEPTH = 288;
  localparam int AW = $clog2(DEPTH), QW = $clog2(NQ);
  localparam int NG = 6;          // entries of the Gaussian pulse
  localparam int FA = NG;         // address of the flat-top pulse
  localparam int T0 = 600;        // start time of the first pulses

  logic clk = 0, rst_n = 0, start = 0;
  logic [31:0] tnow;
  logic mem_we = 0, inst_we = 0;
  logic [QW-1:0] mem_q = '0, inst_q = '0;
  logic [1:0] mem_bank = '0;
  logic [AW-1:0] mem_addr = '0;
  coef_t wdi = '0, wdq = '0;
  inst_t inst = '0;
  logic [NQ-1:0] full, dvalid, busy, mre, bypass, stall, late;
  sample_t di [NQ][WS];
  sample_t dq [NQ][WS];

  compaqt_top #(.NQ(NQ)) dut (
    .clk, .rst_n, .start_i(start), .time_o(tnow),
    .mem_we_i(mem_we), .mem_qubit_i(mem_q), .mem_bank_i(mem_bank), .mem_addr_i(mem_addr),
    .mem_wdata_i_i(wdi), .mem_wdata_q_i(wdq),
    .inst_we_i(inst_we), .inst_qubit_i(inst_q), .inst_i(inst), .inst_full_o(full),
    .dac_valid_o(dvalid), .dac_i_o(di), .dac_q_o(dq),
    .busy_o(busy), .mem_re_o(mre), .bypass_o(bypass), .stall_o(stall), .late_o(late));

  always #5 clk = ~clk;

  typedef struct { twin_t i; twin_t q; } pair_t;
  typedef struct { twin_t i; twin_t q; int due; } exp_t;

  pair_t lib [NQ][$];            // library entries per qubit, address = index
  exp_t  expq [NQ][$];
  int    last_due [NQ];
  int    n_entries_flat [NQ];
  int checks = 0, failures = 0;
  int cnt_nz [3];
  int cnt_bypass = 0, cnt_stall = 0, cnt_late = 0, cnt_full = 0, cnt_b2b = 0;
  int max_conc = 0, cnt_reads = 0, cnt_windows = 0;
  bit checking = 0;

  // expected windows of a pulse on qubit q
  task automatic expect_pulse(int q, int addr, int nent, int t_start);
    int due;
    exp_t e;
    due = t_start + 4;
    if (last_due[q] + 1 > due) due = last_due[q] + 1;
    if (last_due[q] >= 0 && due == last_due[q] + 1) cnt_b2b++;
    for (int a = addr; a < addr + nent; a++) begin
      int r;
      r = lib[q][a].i.flat ? lib[q][a].i.run : 1;
      if (!lib[q][a].i.flat) cnt_nz[lib[q][a].i.nz]++;
      for (int k = 0; k < r; k++) begin
        e.i = lib[q][a].i; e.q = lib[q][a].q; e.due = due;
        expq[q].push_back(e);
        due++;
      end
    end
    last_due[q] = due - 1;
  endtask

  task automatic push_inst(int q, int addr, int nent, int t_start);
    @(negedge clk);
    inst_we = 1; inst_q = QW'(q);
    inst.t_start = 32'(t_start); inst.addr = 16'(addr); inst.nent = 16'(nent);
    @(negedge clk);
    inst_we = 0;
  endtask

  // monitor: all qubits, every cycle
  always @(posedge clk) begin
    if (checking) begin
      int conc;
      conc = 0;
      for (int q = 0; q < NQ; q++) begin
        if (bypass[q]) cnt_bypass++;
        if (stall[q])  cnt_stall++;
        if (late[q])   cnt_late++;
        if (mre[q])    cnt_reads++;
        if (dvalid[q]) begin
          exp_t e;
          conc++;
          cnt_windows++;
          checks++;
          if (expq[q].size() == 0) begin
            failures++; $display("FAIL q%0d unexpected window at %0d", q, tnow);
          end else begin
            e = expq[q].pop_front();
            if (e.due != int'(tnow)) begin
              failures++;
              if (failures < 20) $display("FAIL q%0d window due %0d came %0d", q, e.due, tnow);
            end
            for (int n = 0; n < WS; n++) begin
              checks += 2;
              if (int'(di[q][n]) != ref_sample(e.i, n) || int'(dq[q][n]) != ref_sample(e.q, n)) begin
                failures++;
                if (failures < 20) $display("FAIL q%0d n=%0d I %0d/%0d Q %0d/%0d", q, n,
                  di[q][n], ref_sample(e.i, n), dq[q][n], ref_sample(e.q, n));
              end
            end
          end
        end
      end
      if (conc > max_conc) max_conc = conc;
      if (full != '0) cnt_full++;
    end
  end

  initial begin
    int nfill;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // build and load every qubit's compressed library
    for (int q = 0; q < NQ; q++) begin
      pair_t p;
      last_due[q] = -1;
      for (int a = 0; a < NG; a++) begin
        p.i = rand_win(); p.q = rand_win(); p.q.nz = p.i.nz;
        lib[q].push_back(p);
      end
      // flat-top: two ramp windows, a flat run of 3..12 windows, two ramp windows
      for (int a = 0; a < 5; a++) begin
        if (a == 2) begin
          int run;
          run = rnd(3, 12);
          p.i = flat_win(rnd(10000, 30000), run);
          p.q = flat_win(rnd(-3000, 3000), run);
        end else begin
          p.i = rand_win(); p.q = rand_win(); p.q.nz = p.i.nz;
        end
        lib[q].push_back(p);
      end
      for (int a = 0; a < lib[q].size(); a++)
        for (int b = 0; b < NCOMP; b++) begin
          mem_we = 1; mem_q = QW'(q); mem_bank = 2'(b); mem_addr = AW'(a);
          wdi = word(lib[q][a].i, b); wdq = word(lib[q][a].q, b);
          @(negedge clk);
        end
    end
    mem_we = 0;
    // restart the time base, then schedule
    start = 1;
    @(negedge clk);
    start = 0;
    checking = 1;
    for (int q = 0; q < NQ; q++) begin
      push_inst(q, 0, NG, T0);
      expect_pulse(q, 0, NG, T0);
      push_inst(q, FA, 5, T0 + NG);       // back to back with the Gaussian
      expect_pulse(q, FA, 5, T0 + NG);
    end
    // qubit 0: a pulse whose start time has passed when it reaches the head
    push_inst(0, 0, NG, T0 + 1);
    expect_pulse(0, 0, NG, T0 + 1);
    // qubit 1: fill the instruction buffer
    nfill = 0;
    while (!full[1] && nfill < 40) begin
      push_inst(1, 0, NG, T0 + 100 + nfill);
      expect_pulse(1, 0, NG, T0 + 100 + nfill);
      nfill++;
    end
    // wait for everything to play out
    begin
      int guard;
      guard = 0;
      while (guard < 5000) begin
        bit pending;
        pending = 0;
        for (int q = 0; q < NQ; q++) if (expq[q].size() != 0) pending = 1;
        if (!pending) break;
        @(negedge clk);
        guard++;
      end
    end
    repeat (10) @(negedge clk);
    for (int q = 0; q < NQ; q++) begin
      checks++;
      if (expq[q].size() != 0) begin failures++; $display("FAIL q%0d: %0d windows never came", q, expq[q].size()); end
    end
    $display("mechanisms: windows nz0=%0d nz1=%0d nz2=%0d, bypassed=%0d, stalled=%0d, back-to-back=%0d, late=%0d, full=%0d, max concurrent qubits=%0d",
      cnt_nz[0], cnt_nz[1], cnt_nz[2], cnt_bypass, cnt_stall, cnt_b2b, cnt_late, cnt_full, max_conc);
    $display("memory reads=%0d for %0d windows", cnt_reads, cnt_windows);
    checks++; if (cnt_nz[0] == 0 || cnt_nz[1] == 0 || cnt_nz[2] == 0) begin failures++; $display("FAIL zero-run case missing"); end
    checks++; if (cnt_bypass == 0) begin failures++; $display("FAIL no bypass"); end
    checks++; if (cnt_stall == 0) begin failures++; $display("FAIL no stall"); end
    checks++; if (cnt_b2b == 0) begin failures++; $display("FAIL no back-to-back"); end
    checks++; if (cnt_late == 0) begin failures++; $display("FAIL no late start"); end
    checks++; if (cnt_full == 0) begin failures++; $display("FAIL buffer never full"); end
    checks++; if (max_conc != NQ) begin failures++; $display("FAIL only %0d qubits concurrent", max_conc); end
    checks++; if (cnt_reads >= cnt_windows) begin failures++; $display("FAIL no reads saved"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
