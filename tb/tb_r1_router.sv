// tb_r1_router: self-checking test of the R1 router (default size, core 1).
// Programs the source memory of 20 random neurons with random routing words
// (local to core 1, to other cores, to other chips, empty), then sends those
// neurons' events and events from R2 with random stalls on all outputs.
// A reference model written here predicts, per event, the four words read
// (slots 3, 2, 1, 0) and where each goes: the tag back to the core, the
// packet to R2, or nothing. Also checks that one event with nothing in the
// way reads its four words within 12 cycles.
module tb_r1_router;
  import dynaps_pkg::*;
  localparam int CID = 1;
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

  logic core_in_valid = 0, core_in_ready, core_out_valid, core_out_ready = 0;
  logic [7:0] core_in_data = '0;
  logic [9:0] core_out_data;
  logic r2_out_valid, r2_out_ready = 0, r2_in_valid = 0, r2_in_ready;
  route_pkt_t r2_out_data, r2_in_data;
  logic prg_valid = 0, prg_ready;
  logic [27:0] prg_data = '0;
  r1_router #(.CORE_ID(CID)) dut (.*);

  route_pkt_t words [256][4];
  logic [9:0]  exp_core [$];
  route_pkt_t  exp_r2 [$];
  int n_local = 0, n_remote = 0, n_empty = 0, n_from_r2 = 0;
  int got_core = 0, got_r2 = 0;

  // expected order on each output is the program order: events are sent one
  // at a time, and R2 tags only while no neuron event is in flight
  always @(posedge clk) if (rst_n) begin
    if (core_out_valid && core_out_ready) begin
      check(exp_core.size() > 0 && core_out_data == exp_core[0], $sformatf("core_out %h", core_out_data));
      if (exp_core.size() > 0) void'(exp_core.pop_front());
      got_core++;
    end
    if (r2_out_valid && r2_out_ready) begin
      check(exp_r2.size() > 0 && r2_out_data == exp_r2[0], $sformatf("r2_out %h", r2_out_data));
      if (exp_r2.size() > 0) void'(exp_r2.pop_front());
      got_r2++;
    end
  end
  bit stalls = 1'b1;
  always @(negedge clk) begin
    core_out_ready <= stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
    r2_out_ready   <= stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  task automatic program_word(int n, int slot, route_pkt_t w);
    @(negedge clk);
    prg_valid = 1; prg_data = {1'b1, 8'(n), 2'(slot), 1'b0, 6'd0, w[9:0]};
    @(negedge clk);
    prg_data = {1'b1, 8'(n), 2'(slot), 1'b1, 6'd0, w[19:10]};
    @(negedge clk) prg_valid = 0;
    words[n][slot] = w;
  endtask

  function automatic route_pkt_t random_word();
    route_pkt_t w;
    int kind;
    w = route_pkt_t'($urandom);
    kind = $urandom_range(0, 3);
    case (kind)
      0: begin w.dx = 0; w.dy = 0; w.core_mask = 4'(1 << CID); end // local
      1: begin w.dx = 0; w.dy = 0; w.core_mask = 4'($urandom_range(1, 15)); end // cores
      2: begin w.dx = 2'($urandom_range(1, 3)); end // other chip
      default: begin w.dx = 0; w.dy = 0; w.core_mask = 0; end // empty
    endcase
    return w;
  endfunction

  task automatic expect_event(int n);
    for (int s = 3; s >= 0; s--) begin
      route_pkt_t w;
      w = words[n][s];
      if (w.dx == 0 && w.dy == 0 && w.core_mask == 4'(1 << CID)) begin exp_core.push_back(w.tag); n_local++; end
      else if (w.dx == 0 && w.dy == 0 && w.core_mask == 0) n_empty++;
      else begin exp_r2.push_back(w); n_remote++; end
    end
  endtask

  initial begin
    int neurons [20];
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    do @(posedge clk); while (!prg_ready);
    for (int n = 0; n < 256; n++) for (int s = 0; s < 4; s++) words[n][s] = '0;
    for (int i = 0; i < 20; i++) begin
      neurons[i] = $urandom_range(0, 255);
      for (int s = 0; s < 4; s++) program_word(neurons[i], s, random_word());
    end
    for (int i = 0; i < 20; i++) begin
      int e_core, e_r2;
      e_core = got_core + 0; e_r2 = got_r2;
      expect_event(neurons[i]);
      @(negedge clk); core_in_valid = 1; core_in_data = 8'(neurons[i]);
      do @(posedge clk); while (!core_in_ready);
      @(negedge clk) core_in_valid = 0;
      while (!(exp_core.size() == 0 && exp_r2.size() == 0)) @(posedge clk);
      // an event from R2 goes to the core
      @(negedge clk); r2_in_valid = 1; r2_in_data = route_pkt_t'($urandom);
      exp_core.push_back(r2_in_data.tag); n_from_r2++;
      do @(posedge clk); while (!r2_in_ready);
      @(negedge clk) r2_in_valid = 0;
      while (exp_core.size() != 0) @(posedge clk);
    end
    check(n_local > 0 && n_remote > 0 && n_empty > 0, "all three destinations exercised");
    // rate: one event, no stalls, every word to R2
    stalls = 0;
    for (int s = 0; s < 4; s++) program_word(7, s, '{sy:0, sx:1, dy:0, dx:1, core_mask:4'h1, tag:10'(100 + s)});
    repeat (2) @(negedge clk);
    begin
      int t;
      expect_event(7);
      core_in_valid = 1; core_in_data = 8'd7;
      @(posedge clk); #1 core_in_valid = 0;
      t = 0;
      while (exp_r2.size() != 0 && t < 100) begin @(posedge clk); t++; end
      check(t <= 12, $sformatf("four words read in %0d cycles", t));
    end
    $display("local %0d remote %0d empty %0d from_r2 %0d", n_local, n_remote, n_empty, n_from_r2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
