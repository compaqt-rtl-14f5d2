// tb_qubit_ctrl: self-checking testbench of one qubit control block
// (instruction buffer, pulse sequencer, banked compressed memory,
// decompression engine) at its default parameters.
//
// The host loads a library of four compressed pulses: two of random windows
// (0, 1 or 2 coefficients each) and two flat-top pulses (ramp, one flat-top
// entry of several windows, ramp). Random sequences of timed instructions
// play them, some spaced out, some back to back, some already late. The
// DAC windows are checked sample by sample against the reference IDCT and
// in time: a pulse starts at start time + 4, or right after the previous
// one. Also checked: fewer memory reads than windows (flat-top runs are
// not read), and that every mechanism occurred.
module tb_qubit_ctrl;
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

  pair_t lib [$];
  int    pa [4];   // pulse addresses
  int    pn [4];   // pulse lengths in entries
  exp_t  expq [$];
  int    last_due = -1;
  int checks = 0, failures = 0;
  int cnt_bypass = 0, cnt_stall = 0, cnt_late = 0, cnt_b2b = 0, cnt_reads = 0, cnt_windows = 0;

  task automatic expect_pulse(int p, int t_start);
    int due;
    exp_t e;
    due = t_start + 4;
    if (last_due + 1 > due) due = last_due + 1;
    if (last_due >= 0 && due == last_due + 1) cnt_b2b++;
    for (int a = pa[p]; a < pa[p] + pn[p]; a++) begin
      int r;
      r = lib[a].i.flat ? lib[a].i.run : 1;
      for (int k = 0; k < r; k++) begin
        e.i = lib[a].i; e.q = lib[a].q; e.due = due;
        expq.push_back(e);
        due++;
      end
    end
    last_due = due - 1;
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (bypass) cnt_bypass++;
      if (stall)  cnt_stall++;
      if (late)   cnt_late++;
      if (mre)    cnt_reads++;
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

  initial begin
    int t;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 4; p++) begin
      pa[p] = lib.size();
      if (p < 2) begin
        pn[p] = rnd(3, 12);
        for (int a = 0; a < pn[p]; a++) begin
          pair_t w;
          w.i = rand_win(); w.q = rand_win(); w.q.nz = w.i.nz;
          lib.push_back(w);
        end
      end else begin
        pn[p] = 5;
        for (int a = 0; a < 5; a++) begin
          pair_t w;
          if (a == 2) begin
            int run;
            run = rnd(2, 40);
            w.i = flat_win(rnd(5000, 30000), run);
            w.q = flat_win(rnd(-3000, 3000), run);
          end else begin
            w.i = rand_win(); w.q = rand_win(); w.q.nz = w.i.nz;
          end
          lib.push_back(w);
        end
      end
    end
    for (int a = 0; a < lib.size(); a++)
      for (int b = 0; b < NCOMP; b++) begin
        mem_we = 1; mem_bank = 2'(b); mem_addr = AW'(a);
        wdi = word(lib[a].i, b); wdq = word(lib[a].q, b);
        @(negedge clk);
      end
    mem_we = 0;
    t = int'(tnow) + 50;
    for (int k = 0; k < 80; k++) begin
      int p;
      p = rnd(0, 3);
      while (full) @(negedge clk);
      inst_we = 1;
      inst.t_start = 32'(t); inst.addr = 16'(pa[p]); inst.nent = 16'(pn[p]);
      expect_pulse(p, t);
      @(negedge clk);
      inst_we = 0;
      t = t + rnd(0, 60);
    end
    while (expq.size() != 0 && int'(tnow) < 30000) @(negedge clk);
    repeat (10) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d windows never came", expq.size()); end
    $display("bypassed=%0d stalled=%0d back-to-back=%0d late=%0d reads=%0d windows=%0d",
      cnt_bypass, cnt_stall, cnt_b2b, cnt_late, cnt_reads, cnt_windows);
    checks++; if (cnt_bypass == 0 || cnt_stall == 0 || cnt_b2b == 0 || cnt_late == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
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
