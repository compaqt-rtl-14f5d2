// tb_pulse_sequencer: self-checking testbench of the pulse sequencer.
//
// The instruction buffer is modelled by a queue and the decompression
// engine by a random stall. Checked for every instruction: it is taken
// exactly in the first cycle that is at or after its start time and in
// which no pulse is playing or the previous pulse issues its last read; `late` is flagged iff that cycle is after the start time; its
// reads cover addr .. addr+nent-1 in order; a read is issued in every cycle
// of the pulse without stall and in no cycle with stall.
module tb_pulse_sequencer;
  import compaqt_pkg::*;

  localparam int DEPTH = 288;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic [31:0] tnow = '0;
  logic empty, pop, stall = 0, re, busy, late;
  inst_t head;
  logic [AW-1:0] raddr;
  inst_t q [$];
  int checks = 0, failures = 0, n_late = 0, n_stall = 0, n_done = 0;
  int exp_addr, left;
  bit active = 0;

  pulse_sequencer #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .time_i(tnow), .empty_i(empty),
    .head_i(head), .pop_o(pop), .stall_i(stall), .re_o(re), .raddr_o(raddr),
    .busy_o(busy), .late_o(late));

  always #5 clk = ~clk;
  assign empty = (q.size() == 0);
  assign head  = empty ? '0 : q[0];

  always @(posedge clk) begin
    if (rst_n) begin
      int cyc;
      cyc = int'(tnow);
      // instruction take: at its start time, once the previous pulse has
      // issued (or is issuing in this cycle) its last read
      if (!empty) begin
        bit ready;
        ready = !active || (left == 1 && re);
        checks++;
        if (pop !== (ready && cyc >= int'(q[0].t_start))) begin
          failures++; $display("FAIL pop=%0d at %0d, start %0d", pop, cyc, q[0].t_start);
        end
      end
      if (active) begin
        checks++;
        if (re !== !stall) begin failures++; $display("FAIL re=%0d stall=%0d at %0d", re, stall, cyc); end
        if (stall) n_stall++;
        if (re) begin
          checks++;
          if (int'(raddr) != exp_addr) begin failures++; $display("FAIL addr %0d exp %0d", raddr, exp_addr); end
          exp_addr++;
          left--;
          if (left == 0) begin active = 0; n_done++; end
        end
      end else begin
        checks++;
        if (re) begin failures++; $display("FAIL read while idle at %0d", cyc); end
      end
      if (pop) begin
        checks++;
        if (late !== (cyc != int'(q[0].t_start))) begin failures++; $display("FAIL late flag"); end
        if (late) n_late++;
        exp_addr = int'(q[0].addr);
        left = int'(q[0].nent);
        active = 1;
        void'(q.pop_front());
      end
      tnow <= tnow + 1;
      stall <= ($urandom_range(0, 3) == 0);
    end
  end

  initial begin
    int t;
    repeat (2) @(negedge clk);
    rst_n = 1;
    t = 5;
    for (int k = 0; k < 60; k++) begin
      inst_t i;
      i.addr = 16'($urandom_range(0, 200));
      i.nent = 16'($urandom_range(1, 20));
      // some pulses scheduled before the previous one can finish (late),
      // some back to back, some with idle gaps
      t = t + int'($urandom_range(0, 40));
      i.t_start = 32'(t);
      q.push_back(i);
    end
    while (q.size() != 0 || active) @(negedge clk);
    checks++;
    if (n_done != 60) begin failures++; $display("FAIL %0d pulses done", n_done); end
    checks++;
    if (n_late == 0 || n_stall == 0) begin failures++; $display("FAIL late %0d stall %0d", n_late, n_stall); end
    $display("late=%0d stalled cycles=%0d", n_late, n_stall);
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
