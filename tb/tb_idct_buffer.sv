// tb_idct_buffer: self-checking testbench of the IDCT buffer and bypass.
// Random valid / bypass / flat / IDCT inputs; the output one cycle later
// must be the IDCT window, the replicated flat value, or zeros when idle.
module tb_idct_buffer;
  import compaqt_pkg::*;

  localparam int WS = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, bypass = 0;
  sample_t flat = '0;
  sample_t idct [WS];
  logic win_valid;
  sample_t win [WS];
  int checks = 0, failures = 0, n_bypass = 0;

  idct_buffer #(.WS(WS)) dut (.clk, .rst_n, .in_valid, .bypass, .flat_i(flat),
    .idct_i(idct), .win_valid, .win_o(win));

  always #5 clk = ~clk;

  initial begin
    int exp_s [WS];
    logic exp_v;
    foreach (idct[n]) idct[n] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      in_valid = ($urandom_range(0, 3) != 0);
      bypass   = ($urandom_range(0, 2) == 0);
      flat     = sample_t'($urandom);
      foreach (idct[n]) idct[n] = sample_t'($urandom);
      exp_v = in_valid;
      for (int n = 0; n < WS; n++)
        exp_s[n] = !in_valid ? 0 : bypass ? int'(flat) : int'(idct[n]);
      if (in_valid && bypass) n_bypass++;
      @(negedge clk);
      checks++;
      if (win_valid !== exp_v) begin failures++; $display("FAIL valid"); end
      for (int n = 0; n < WS; n++) begin
        checks++;
        if (int'(win[n]) != exp_s[n]) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d n=%0d got %0d exp %0d", t, n, win[n], exp_s[n]);
        end
      end
    end
    checks++;
    if (n_bypass == 0) begin failures++; $display("FAIL bypass never exercised"); end
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
