// tb_qdi_merge: self-checking test of the arbitrated merge (N = 3).
// Each input sends 100 tokens {input id, sequence number} with random
// pauses; the output stalls at random. Checks that every token arrives once,
// that each input's tokens stay in order, that a stalled output keeps its
// token, and that with all inputs always valid the grants rotate (0,1,2,...).
module tb_qdi_merge;
  localparam int N = 3;
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

  typedef logic [15:0] tok_t;
  logic [N-1:0] in_valid = '0, in_ready;
  tok_t in_data [N];
  logic out_valid, out_ready = 1'b0;
  tok_t out_data;
  qdi_merge #(.N(N), .T(tok_t)) dut (.*);

  int next_seq [N];
  int got = 0;
  bit rr_mode = 0;
  int last_src = -1;
  int rr_ok = 0;
  tok_t held;
  bit was_stalled = 0;

  always @(posedge clk) if (rst_n) begin
    if (was_stalled) check(out_valid && out_data == held, "stalled output changed");
    was_stalled = out_valid && !out_ready;
    held = out_data;
    if (out_valid && out_ready) begin
      int src, sq;
      src = int'(out_data[15:12]); sq = int'(out_data[11:0]);
      check(src < N && sq == next_seq[src], $sformatf("src %0d seq %0d expected %0d", src, sq, next_seq[src]));
      if (src < N) next_seq[src] = sq + 1;
      if (rr_mode && last_src >= 0) check(src == (last_src + 1) % N, "round-robin order");
      last_src = src;
      got++;
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_src
    initial begin
      in_data[i] = '0;
      wait (rst_n);
      for (int s = 0; s < 100; s++) begin
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        in_valid[i] = 1'b1; in_data[i] = {4'(i), 12'(s)};
        do @(posedge clk); while (!in_ready[i]);
        @(negedge clk) in_valid[i] = 1'b0;
      end
    end
  end
  always @(negedge clk) out_ready <= rr_mode ? 1'b1 : ($urandom_range(0, 2) != 0);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (got == 3 * 100);
    for (int i = 0; i < N; i++) check(next_seq[i] == 100, "all tokens of an input");
    // fairness: all inputs permanently valid
    @(negedge clk);
    rr_mode = 1; last_src = -1;
    in_valid = '1;
    for (int i = 0; i < N; i++) in_data[i] = {4'(i), 12'(next_seq[i])};
    repeat (12) begin
      @(posedge clk);
      @(negedge clk);
      for (int i = 0; i < N; i++) in_data[i] = {4'(i), 12'(next_seq[i])};
    end
    in_valid = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
