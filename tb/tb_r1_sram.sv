// tb_r1_sram: self-checking test of the R1 source memory (default size).
// Writes 300 random words as two 10-bit halves, keeps a reference copy, then
// reads all 1024 words with random output stalls and compares, including
// unwritten words (zero after the clearing sweep). Checks that the sweep
// holds writes and reads off for exactly 1024 cycles after reset, and the
// one-cycle read latency.
module tb_r1_sram;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic rd_valid = 0, rd_ready, q_valid, q_ready = 0;
  logic [9:0] rd_data = '0;
  logic [19:0] q_data;
  logic wr_en = 0, wr_hi = 0, wr_ready;
  logic [9:0] wr_addr = '0, wr_data = '0;
  r1_sram dut (.*);

  logic [19:0] ref_mem [1024];
  int reads = 0;
  logic [9:0] addr_q [$];

  always @(posedge clk) if (rst_n) begin
    if (q_valid && q_ready) begin
      check(q_data == ref_mem[addr_q[0]], $sformatf("read %h got %h exp %h", addr_q[0], q_data, ref_mem[addr_q[0]]));
      void'(addr_q.pop_front());
      reads++;
    end
    if (rd_valid && rd_ready) addr_q.push_back(rd_data);
  end

  initial begin
    for (int i = 0; i < 1024; i++) ref_mem[i] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    begin
      int t;
      t = 0;
      #1;
      while (!wr_ready) begin
        check(!rd_ready, "no read during the clearing sweep");
        @(posedge clk); #1; t++;
      end
      check(t == 1024, $sformatf("clearing sweep took %0d cycles", t));
    end
    for (int i = 0; i < 300; i++) begin
      logic [9:0] a; logic [19:0] w;
      a = 10'($urandom); w = 20'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = a; wr_hi = 0; wr_data = w[9:0];
      @(negedge clk); wr_hi = 1; wr_data = w[19:10];
      ref_mem[a] = w;
    end
    @(negedge clk) wr_en = 0;
    // latency: request at edge k, word valid right after that edge
    q_ready = 0; rd_valid = 1; rd_data = 10'd5;
    @(posedge clk); #1;
    check(q_valid && q_data == ref_mem[5], "word valid one cycle after the request");
    rd_valid = 0;
    @(negedge clk) q_ready = 1;
    @(negedge clk);
    fork
      forever @(negedge clk) q_ready = ($urandom_range(0, 2) != 0);
    join_none
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); rd_valid = 1; rd_data = 10'(i);
      do @(posedge clk); while (!rd_ready);
      @(negedge clk) rd_valid = 0;
    end
    wait (reads == 1025);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
