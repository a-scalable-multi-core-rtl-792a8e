// tb_qdi_mask_split: self-checking test of the multicast split tree (N = 4).
// 300 random tokens with random 4-bit masks (including 0); outputs stall at
// random. Every output must receive, in order, exactly the tokens whose
// mask has its bit set; a token is consumed only when all its copies are out.
module tb_qdi_mask_split;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid = 0, in_ready;
  logic [19:0] in_data = '0, out_data;
  logic [N-1:0] mask = '0, out_valid, out_ready = '0;
  qdi_mask_split #(.N(N), .T(logic [19:0])) dut (.*);

  logic [19:0] exp_q [N][$];
  int got = 0, expected = 0;
  logic [N-1:0] taken = '0;
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < N; o++)
      if (out_valid[o] && out_ready[o]) begin
        check(exp_q[o].size() > 0 && out_data == exp_q[o][0], $sformatf("output %0d data", o));
        if (exp_q[o].size() > 0) void'(exp_q[o].pop_front());
        taken[o] = 1'b1;
        got++;
      end
    if (in_valid && in_ready) begin
      check((taken & mask) == mask, "token consumed before all copies taken");
      taken = '0;
    end
  end
  always @(negedge clk) out_ready <= N'($urandom);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_data = 20'($urandom); mask = N'($urandom);
      for (int o = 0; o < N; o++) if (mask[o]) begin exp_q[o].push_back(in_data); expected++; end
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 1'b0;
    end
    repeat (3) @(posedge clk);
    check(got == expected, $sformatf("received %0d of %0d copies", got, expected));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
