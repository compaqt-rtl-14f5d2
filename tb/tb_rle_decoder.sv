// tb_rle_decoder: self-checking testbench of the RLE decoder and RLE buffer.
//
// A model of the sequencer and memory feeds compressed windows, one read per
// cycle unless stall_o is high, exactly as the real pipeline does. A
// scoreboard holds the expected RLE-buffer contents: the leading
// coefficients followed by zeros, or the flat value with the bypass flag,
// repeated for the run length. Also checked: windows without a codeword,
// and that a stream of windows and runs leaves the buffer without a bubble
// (one buffer entry per cycle).
module tb_rle_decoder;
  import compaqt_pkg::*;
  import compaqt_tb_pkg::*;

  localparam int WS = 16, NCOMP = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  coef_t words [NCOMP];
  logic stall, bvalid, bbypass, run_start;
  sample_t bflat;
  coef_t bcoef [WS];

  rle_decoder #(.WS(WS), .NCOMP(NCOMP)) dut (
    .clk, .rst_n, .in_valid, .words_i(words), .stall_o(stall),
    .buf_valid(bvalid), .buf_bypass(bbypass), .buf_flat(bflat), .buf_coef(bcoef),
    .run_start_o(run_start));

  always #5 clk = ~clk;

  typedef struct { bit bypass; int flat; int coef [WS]; } exp_t;
  exp_t expq [$];
  twin_t stim [$];
  int checks = 0, failures = 0, runs = 0, outs = 0, first_out = -1, last_out = -1, cyc = 0;
  bit raw_mode = 0;

  task automatic push_expected(twin_t w);
    exp_t e;
    if (w.flat) begin
      e.bypass = 1; e.flat = sat16(w.val);
      foreach (e.coef[p]) e.coef[p] = 0;
      repeat (w.run) expq.push_back(e);
    end else begin
      e.bypass = 0; e.flat = 0;
      foreach (e.coef[p]) e.coef[p] = 0;
      if (w.nz > 0) e.coef[0] = w.c0;
      if (w.nz > 1) e.coef[1] = w.c1;
      expq.push_back(e);
    end
  endtask

  // sequencer + memory model: issue a read when there is work and no stall
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && stim.size() > 0 && !stall) begin
      twin_t w;
      w = stim.pop_front();
      for (int b = 0; b < NCOMP; b++) words[b] <= word(w, b);
      in_valid <= 1'b1;
      push_expected(w);
    end else begin
      in_valid <= 1'b0;
    end
  end

  // monitor
  always @(posedge clk) begin
    if (rst_n && bvalid) begin
      exp_t e;
      outs++;
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
      checks++;
      if (expq.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        e = expq.pop_front();
        if (bbypass !== e.bypass) begin failures++; $display("FAIL bypass %0d exp %0d", bbypass, e.bypass); end
        else if (e.bypass) begin
          if (int'(bflat) != e.flat) begin failures++; $display("FAIL flat %0d exp %0d", bflat, e.flat); end
        end else begin
          for (int p = 0; p < WS; p++)
            if (int'(bcoef[p]) != e.coef[p]) begin
              failures++; $display("FAIL coef[%0d]=%0d exp %0d", p, bcoef[p], e.coef[p]);
            end
        end
      end
    end
    if (rst_n && run_start) runs++;
  end

  initial begin
    int total;
    words = '{default: '0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // mixed stream: windows and flat runs of 1..6 windows
    total = 0;
    for (int i = 0; i < 300; i++) begin
      twin_t w;
      if (i % 7 == 3) w = flat_win(rnd(-40000, 40000), rnd(1, 6));
      else w = rand_win();
      stim.push_back(w);
      total += w.flat ? w.run : 1;
    end
    while (stim.size() != 0) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0 || outs != total) begin
      failures++; $display("FAIL outputs %0d exp %0d", outs, total);
    end
    // rate: one buffer entry per cycle without bubbles
    checks++;
    if (last_out - first_out + 1 != total) begin
      failures++; $display("FAIL %0d outputs took %0d cycles", total, last_out - first_out + 1);
    end
    checks++;
    if (runs != 300 / 7 + 1) begin failures++; $display("FAIL runs %0d", runs); end
    // a window without a codeword: all three words are coefficients
    @(negedge clk);
    words[0] = 18'sd111; words[1] = -18'sd222; words[2] = 18'sd333;
    in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!(bvalid && !bbypass && bcoef[0] == 111 && bcoef[1] == -222 && bcoef[2] == 333 && bcoef[3] == 0)) begin
      failures++; $display("FAIL no-codeword window");
    end
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
