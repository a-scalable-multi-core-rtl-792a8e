// tb_aer_encoder: self-checking test of the handshake blocks and address
// encoder at 4 x 4 neurons. Each neuron model spikes at random times with a
// four-phase handshake (raise req, wait ack, drop req, wait ack low). Checks
// that every spike yields exactly one address-event with that neuron's
// address, that ack only rises for a pending request, and that with all
// neurons spiking at once the 16 events leave in row/column round-robin
// order at one event per two cycles.
module tb_aer_encoder;
  localparam int R = 4, C = 4, NN = R * C;
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

  logic [NN-1:0] nrn_req = '0, nrn_ack;
  logic ev_valid, ev_ready = 0;
  logic [3:0] ev_data;
  aer_encoder #(.ROWS(R), .COLS(C)) dut (.*);

  int spikes [NN], events [NN];
  int total_events = 0;
  bit burst_mode = 0;
  int burst_order [$];

  logic [NN-1:0] req_d = '0, ack_d = '0;
  int owed [NN];   // acknowledged spikes whose event has not left yet
  always @(posedge clk) if (rst_n) begin
    #1;
    for (int n = 0; n < NN; n++)
      if (nrn_ack[n] && !ack_d[n]) begin
        check(req_d[n], "ack without request");
        owed[n]++;
      end
    req_d = nrn_req; ack_d = nrn_ack;
  end
  always @(posedge clk) if (rst_n) begin
    if (ev_valid && ev_ready) begin
      check(owed[ev_data] > 0, $sformatf("event %0d without an acknowledged spike", ev_data));
      if (owed[ev_data] > 0) owed[ev_data]--;
      events[ev_data]++;
      total_events++;
      if (burst_mode) burst_order.push_back(int'(ev_data));
    end
  end
  always @(negedge clk) ev_ready <= burst_mode ? 1'b1 : ($urandom_range(0, 2) != 0);

  task automatic spike(int n);
    @(negedge clk) nrn_req[n] = 1'b1;
    do @(posedge clk); while (!nrn_ack[n]);
    @(negedge clk) nrn_req[n] = 1'b0;
    do @(posedge clk); while (nrn_ack[n]);
    spikes[n]++;
  endtask

  initial begin
    for (int n = 0; n < NN; n++) begin spikes[n] = 0; events[n] = 0; owed[n] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < NN; n++) begin
      fork
        automatic int nn = n;
        begin
          repeat (10) begin
            repeat ($urandom_range(0, 30)) @(posedge clk);
            spike(nn);
          end
        end
      join_none
    end
    wait fork;
    repeat (20) @(posedge clk);
    for (int n = 0; n < NN; n++) check(events[n] == 10 && spikes[n] == 10, $sformatf("neuron %0d: %0d events", n, events[n]));
    // burst: all neurons at once
    burst_mode = 1;
    @(negedge clk);
    nrn_req = '1;
    begin
      int t;
      t = 0;
      while (burst_order.size() < NN && t < 200) begin @(posedge clk); t++; end
      check(t <= 2 * NN + 3, $sformatf("burst of %0d took %0d cycles", NN, t));
    end
    @(negedge clk) nrn_req = '0;
    for (int k = 1; k < burst_order.size(); k++) begin
      // every row holds the same number of requests, so the row pointer
      // never picks the same row twice in a row
      check(burst_order[k] / C != burst_order[k-1] / C, "rows rotate");
    end
    begin
      bit seen [NN];
      for (int n = 0; n < NN; n++) seen[n] = 0;
      foreach (burst_order[k]) seen[burst_order[k]] = 1;
      for (int n = 0; n < NN; n++) check(seen[n], "every neuron in burst");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
