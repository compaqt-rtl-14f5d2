// tb_compressed_wave_mem: self-checking testbench of the banked compressed
// waveform memory. Fills every bank and address with random I/Q words through
// the host port, then reads random window addresses and checks that all
// NCOMP words of the window arrive together, from the right banks, with the
// I and Q halves in place, one cycle after the read, and that the output
// holds while no read is issued.
module tb_compressed_wave_mem;
  import compaqt_pkg::*;

  localparam int NCOMP = 3, DEPTH = 288;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  logic we = 0, re = 0;
  logic [1:0] wbank = '0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  coef_t wi = '0, wq = '0;
  logic rvalid;
  coef_t iwords [NCOMP];
  coef_t qwords [NCOMP];
  int checks = 0, failures = 0;
  int mi [NCOMP][DEPTH];
  int mq [NCOMP][DEPTH];

  compressed_wave_mem #(.NCOMP(NCOMP), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .we_i(we), .wbank_i(wbank), .waddr_i(waddr), .wdata_i_i(wi), .wdata_q_i(wq),
    .re_i(re), .raddr_i(raddr), .rvalid_o(rvalid), .i_words_o(iwords), .q_words_o(qwords));

  always #5 clk = ~clk;

  task automatic check_window(int a);
    for (int b = 0; b < NCOMP; b++) begin
      checks += 2;
      if (int'(iwords[b]) != mi[b][a] || int'(qwords[b]) != mq[b][a]) begin
        failures++;
        if (failures < 10) $display("FAIL addr %0d bank %0d: %0d/%0d exp %0d/%0d", a, b,
          iwords[b], qwords[b], mi[b][a], mq[b][a]);
      end
    end
  endtask

  initial begin
    int a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int b = 0; b < NCOMP; b++)
      for (int i = 0; i < DEPTH; i++) begin
        mi[b][i] = int'($signed(18'($urandom)));
        mq[b][i] = int'($signed(18'($urandom)));
        we = 1; wbank = 2'(b); waddr = AW'(i); wi = coef_t'(mi[b][i]); wq = coef_t'(mq[b][i]);
        @(negedge clk);
      end
    we = 0;
    for (int t = 0; t < 1000; t++) begin
      a = int'($urandom_range(0, DEPTH - 1));
      re = 1; raddr = AW'(a);
      @(negedge clk);
      re = 0;
      checks++;
      if (!rvalid) begin failures++; $display("FAIL rvalid"); end
      check_window(a);
      // output holds without a read
      raddr = AW'($urandom_range(0, DEPTH - 1));
      @(negedge clk);
      checks++;
      if (rvalid) begin failures++; $display("FAIL rvalid without read"); end
      check_window(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
