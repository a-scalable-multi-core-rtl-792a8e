// tb_qdi_ctrl_split: self-checking test of the controlled split (N = 4).
// 300 random tokens with random select values; outputs stall at random.
// Each output must receive exactly the tokens addressed to it, in order,
// and no other output may show a valid token at the same time.
module tb_qdi_ctrl_split;
  localparam int N = 4;
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

  logic in_valid = 0, in_ready;
  logic [19:0] in_data = '0, out_data;
  logic [1:0] sel = '0;
  logic [N-1:0] out_valid, out_ready = '0;
  qdi_ctrl_split #(.N(N), .T(logic [19:0])) dut (.*);

  logic [19:0] exp_q [N][$];
  int got = 0;
  always @(posedge clk) if (rst_n) begin
    check($countones(out_valid) <= 1, "more than one output valid");
    for (int o = 0; o < N; o++)
      if (out_valid[o] && out_ready[o]) begin
        check(exp_q[o].size() > 0 && out_data == exp_q[o][0], $sformatf("output %0d data", o));
        if (exp_q[o].size() > 0) void'(exp_q[o].pop_front());
        got++;
      end
  end
  always @(negedge clk) out_ready <= N'($urandom);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_data = 20'($urandom); sel = 2'($urandom);
      exp_q[sel].push_back(in_data);
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 1'b0;
    end
    repeat (3) @(posedge clk);
    check(got == 300, $sformatf("received %0d of 300", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
