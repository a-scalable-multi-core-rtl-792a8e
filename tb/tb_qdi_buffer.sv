// tb_qdi_buffer: self-checking test of the one-place buffer.
// Sends 200 random tokens with random input and output stalls and checks
// that they come out unchanged and in order, that a stalled output holds its
// token, and that with no stalls N tokens take 2N cycles (half buffer).
module tb_qdi_buffer;
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

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [19:0] in_data = '0, out_data;
  qdi_buffer #(.T(logic [19:0])) dut (.*);

  logic [19:0] exp_q [$];
  int received = 0;
  bit random_ready = 1'b1;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) exp_q.push_back(in_data);
    if (out_valid && out_ready) begin
      check(exp_q.size() > 0 && out_data == exp_q[0], $sformatf("token %0d mismatch %h", received, out_data));
      if (exp_q.size() > 0) void'(exp_q.pop_front());
      received++;
    end
    check(!(in_ready && out_valid), "in_ready while full");
  end
  always @(negedge clk) out_ready <= random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      in_valid = 1'b1; in_data = 20'($urandom);
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 1'b0;
    end
    wait (received == 200);
    check(exp_q.size() == 0, "tokens left over");
    // throughput: 20 back-to-back tokens, output always ready
    random_ready = 1'b0;
    @(negedge clk);
    received = 0;
    t0 = 0;
    in_valid = 1'b1;
    for (int i = 0; i < 20; i++) begin
      in_data = 20'(i);
      do begin @(posedge clk); t0++; end while (!in_ready);
      @(negedge clk);
    end
    in_valid = 1'b0;
    check(t0 == 40 || t0 == 39, $sformatf("20 tokens took %0d cycles, expected about 40", t0));
    wait (received == 20);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
