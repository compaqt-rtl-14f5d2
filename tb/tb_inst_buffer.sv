// tb_inst_buffer: self-checking testbench of the instruction buffer. Random
// pushes and pops (respecting full/empty, with simultaneous push and pop)
// are compared with a queue model: order, contents, full and empty flags.
module tb_inst_buffer;
  import compaqt_pkg::*;

  localparam int DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic push = 0, pop = 0, full, empty;
  inst_t din, head;
  inst_t model [$];
  int checks = 0, failures = 0, fulls = 0;

  inst_buffer #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .push_i(push), .inst_i(din), .full_o(full),
    .pop_i(pop), .head_o(head), .empty_o(empty));

  always #5 clk = ~clk;

  initial begin
    din = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      // bias towards filling in the first half, draining in the second
      int pp;
      pp = (t % 400 < 200) ? 3 : 1;
      checks += 2;
      if (full !== (model.size() == DEPTH)) begin failures++; $display("FAIL full t=%0d", t); end
      if (empty !== (model.size() == 0)) begin failures++; $display("FAIL empty t=%0d", t); end
      if (full) fulls++;
      push = ($urandom_range(0, 3) < pp) && !full;
      pop  = ($urandom_range(0, 3) >= pp) && !empty;
      din  = {$urandom, $urandom};
      if (pop) begin
        checks++;
        if (head !== model[0]) begin failures++; $display("FAIL head t=%0d", t); end
      end
      @(negedge clk);
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
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
