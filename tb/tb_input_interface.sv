// tb_input_interface: self-checking test of the host input decoder.
// 400 random 34-bit words, a third of them for another chip, with random
// stalls on all outputs. A reference decoder written here predicts for
// each word the destination (core programming, core configuration, bias
// generator 1 or 2, R2, or dropped) and the payload; deliveries are checked
// in order per destination.
module tb_input_interface;
  import dynaps_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [2:0] chip_id = 3'd5;
  logic fpga_in_valid = 0, fpga_in_ready;
  logic [33:0] fpga_in_data = '0;
  logic [3:0] prg_valid, prg_ready = '0, conf_valid, conf_ready = '0;
  logic [27:0] prg_data;
  logic [11:0] conf_data;
  logic [1:0] bias_valid, bias_ready = '0;
  logic [22:0] bias_data;
  logic r2_out_valid, r2_out_ready = 0;
  route_pkt_t r2_out_data;
  input_interface dut (.*);

  // destinations: 0..3 prg, 4..7 conf, 8 BiasGen2, 9 BiasGen1, 10 R2
  logic [27:0] exp_q [11][$];
  int n_drop = 0, n_exp = 0, n_got = 0;
  int dest_seen [11];

  task automatic take(int d, logic [27:0] v);
    check(exp_q[d].size() > 0 && exp_q[d][0] == v, $sformatf("destination %0d payload %h", d, v));
    if (exp_q[d].size() > 0) void'(exp_q[d].pop_front());
    dest_seen[d]++; n_got++;
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) begin
      if (prg_valid[c] && prg_ready[c]) take(c, prg_data);
      if (conf_valid[c] && conf_ready[c]) take(4 + c, 28'(conf_data));
    end
    for (int b = 0; b < 2; b++) if (bias_valid[b] && bias_ready[b]) take(8 + b, 28'(bias_data));
    if (r2_out_valid && r2_out_ready) take(10, 28'(r2_out_data));
    // a foreign word leaving the input buffer is dropped at once
    if (dut.ib_valid && dut.ib_data[33:31] != chip_id)
      check(dut.ib_ready && !(|prg_valid) && !(|conf_valid) && !(|bias_valid) && !r2_out_valid, "foreign word dropped");
  end
  always @(negedge clk) begin
    prg_ready <= 4'($urandom); conf_ready <= 4'($urandom);
    bias_ready <= 2'($urandom); r2_out_ready <= 1'($urandom);
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 400; i++) begin
      logic [33:0] w;
      w = {2'($urandom), 32'($urandom)};
      if ($urandom_range(0, 2) != 0) w[33:31] = chip_id;
      else if (w[33:31] == chip_id) w[31] = ~w[31];
      if (w[33:31] != chip_id) n_drop++;
      else begin
        n_exp++;
        if (!w[30]) exp_q[w[29:28]].push_back(w[27:0]);
        else if (w[29]) exp_q[w[28] ? 9 : 8].push_back(28'(w[22:0]));
        else if (w[28]) exp_q[10].push_back(28'(w[19:0]));
        else exp_q[4 + w[27:26]].push_back(28'(w[11:0]));
      end
      @(negedge clk);
      fpga_in_valid = 1; fpga_in_data = w;
      do @(posedge clk); while (!fpga_in_ready);
      @(negedge clk) fpga_in_valid = 0;
    end
    repeat (5) @(posedge clk);
    check(n_got == n_exp && n_drop > 0, $sformatf("delivered %0d of %0d, dropped %0d", n_got, n_exp, n_drop));
    for (int d = 0; d < 11; d++) check(dest_seen[d] > 0, $sformatf("destination %0d used", d));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
