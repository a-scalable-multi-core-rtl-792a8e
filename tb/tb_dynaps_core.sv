// tb_dynaps_core: self-checking test of one core at 4 x 4 neurons and 8
// words per neuron. Programs every CAM word through the 28-bit programming
// word (random tags from a small set, random synapse types), also sends SRAM
// programming words that the core must ignore, then broadcasts 40 tags and
// compares the per-neuron, per-type pulse counts with a reference. Finally
// makes neurons spike and checks the address-events that leave the core.
module tb_dynaps_core;
  import dynaps_pkg::*;
  localparam int R = 4, C = 4, NN = R * C, W = 8;
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

  logic ev_in_valid = 0, ev_in_ready, ev_out_valid, ev_out_ready = 1, prg_valid = 0, prg_ready, preb, check_o;
  logic [9:0] ev_in_data = '0;
  logic [3:0] ev_out_data;
  logic [27:0] prg_data = '0;
  logic [NN-1:0] nrn_req = '0, nrn_ack;
  logic [3:0] syn_pulse [NN];
  dynaps_core #(.ROWS(R), .COLS(C), .WORDS(W)) dut (
    .clk, .rst_n, .ev_in_valid, .ev_in_ready, .ev_in_data, .ev_out_valid, .ev_out_ready,
    .ev_out_data, .prg_valid, .prg_ready, .prg_data, .nrn_req, .nrn_ack, .syn_pulse, .preb, .check(check_o));

  logic [9:0] ref_tag [NN][W];
  logic [1:0] ref_type [NN][W];
  int pulse_sum [NN][4];

  always @(posedge clk) if (rst_n)
    for (int n = 0; n < NN; n++) for (int t = 0; t < 4; t++) pulse_sum[n][t] += int'(syn_pulse[n][t]);

  initial begin
    int got_ev [NN];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    do @(posedge clk); while (!prg_ready);
    for (int n = 0; n < NN; n++) for (int w = 0; w < W; w++) begin
      ref_tag[n][w] = 10'($urandom_range(1, 5)); ref_type[n][w] = 2'($urandom);
      @(negedge clk);
      prg_valid = 1;
      prg_data = {1'b0, 8'(n), 6'(w), ref_tag[n][w], ref_type[n][w], 1'b0};
      @(negedge clk);  // an SRAM word that must not touch the CAM
      prg_data = {1'b1, 8'(n), 2'(w), 1'b0, 16'hFFFF};
    end
    @(negedge clk) prg_valid = 0;
    for (int i = 0; i < 40; i++) begin
      logic [9:0] t;
      t = 10'($urandom_range(1, 6));
      for (int n = 0; n < NN; n++) for (int k = 0; k < 4; k++) pulse_sum[n][k] = 0;
      @(negedge clk); ev_in_valid = 1; ev_in_data = t;
      do @(posedge clk); while (!ev_in_ready);
      @(negedge clk) ev_in_valid = 0;
      repeat (W + 6) @(posedge clk);
      for (int n = 0; n < NN; n++) for (int k = 0; k < 4; k++) begin
        int e;
        e = 0;
        for (int w = 0; w < W; w++) if (ref_tag[n][w] == t && ref_type[n][w] == 2'(k)) e++;
        check(pulse_sum[n][k] == e, $sformatf("tag %0d neuron %0d type %0d: %0d expected %0d", t, n, k, pulse_sum[n][k], e));
      end
    end
    // spikes
    for (int n = 0; n < NN; n++) got_ev[n] = 0;
    fork
      forever @(posedge clk) if (ev_out_valid && ev_out_ready) got_ev[ev_out_data]++;
    join_none
    for (int n = 0; n < NN; n += 3) begin
      @(negedge clk) nrn_req[n] = 1;
      do @(posedge clk); while (!nrn_ack[n]);
      @(negedge clk) nrn_req[n] = 0;
    end
    repeat (10) @(posedge clk);
    for (int n = 0; n < NN; n++) check(got_ev[n] == ((n % 3 == 0) ? 1 : 0), $sformatf("events of neuron %0d", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
