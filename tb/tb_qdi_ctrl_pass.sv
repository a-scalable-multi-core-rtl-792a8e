// tb_qdi_ctrl_pass: self-checking test of the controlled pass.
// 300 random tokens with random 'sig'; the output stalls at random. Tokens
// with sig = 1 must come out in order; tokens with sig = 0 must be consumed
// in the cycle they are offered and never appear on the output.
module tb_qdi_ctrl_pass;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid = 0, in_ready, sig = 0, out_valid, out_ready = 0;
  logic [19:0] in_data = '0, out_data;
  qdi_ctrl_pass #(.T(logic [19:0])) dut (.*);

  logic [19:0] exp_q [$];
  int passed = 0, dropped = 0;
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !sig) begin
      check(in_ready && !out_valid, "skip must consume without output");
      dropped++;
    end
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_data == exp_q[0], "passed data");
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      passed++;
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  initial begin
    int npass = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_data = 20'($urandom); sig = 1'($urandom);
      if (sig) begin exp_q.push_back(in_data); npass++; end
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 1'b0;
    end
    repeat (3) @(posedge clk);
    check(passed == npass && dropped == 300 - npass, $sformatf("passed %0d/%0d dropped %0d", passed, npass, dropped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
