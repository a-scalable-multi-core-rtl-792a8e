// tb_qdi_split: self-checking test of the two-way copy.
// 150 random tokens, both outputs stall independently at random. Each
// output must see every token once, in order; the input token may only be
// consumed in a cycle where both outputs have taken their copy.
module tb_qdi_split;
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

  logic in_valid = 0, in_ready, out0_valid, out0_ready = 0, out1_valid, out1_ready = 0;
  logic [19:0] in_data = '0, out0_data, out1_data;
  qdi_split #(.T(logic [19:0])) dut (.*);

  logic [19:0] sent [$];
  int n0 = 0, n1 = 0, nin = 0;
  bit got0 = 0, got1 = 0;  // copies of the current input token already taken

  always @(posedge clk) if (rst_n) begin
    if (out0_valid && out0_ready) begin
      check(out0_data == sent[n0], "out0 data"); n0++; got0 = 1;
    end
    if (out1_valid && out1_ready) begin
      check(out1_data == sent[n1], "out1 data"); n1++; got1 = 1;
    end
    if (in_valid && in_ready) begin
      check(got0 && got1, "input consumed before both copies taken");
      got0 = 0; got1 = 0; nin++;
    end
  end
  always @(negedge clk) begin
    out0_ready <= ($urandom_range(0, 2) != 0);
    out1_ready <= ($urandom_range(0, 3) != 0);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 150; i++) begin
      @(negedge clk);
      in_valid = 1'b1; in_data = 20'($urandom);
      sent.push_back(in_data);
      do @(posedge clk); while (!in_ready);
      @(negedge clk) in_valid = 1'b0;
    end
    repeat (4) @(posedge clk);
    check(n0 == 150 && n1 == 150 && nin == 150, $sformatf("counts %0d %0d %0d", n0, n1, nin));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
