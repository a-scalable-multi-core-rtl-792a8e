// tb_cam_array: self-checking test of the CAM array at 8 neurons x 4 words.
// Checks the clearing sweep (WORDS cycles, no event or write taken, then
// every word answers tag 0). Programs random tags from a small set (so
// several words match) and random types, then broadcasts 60 tags. For every
// broadcast it checks, against a reference copy of the memory: the pulse of
// each neuron in the cycle that visits each word (only where the word holds
// the tag, with that word's type), the order PreB up -> Check up -> PreB
// down -> Check down, that no new event is taken before the cycle
// completes, and that one broadcast takes WORDS + 3 cycles. Also checks that
// a write during the search (WENB) blocks the pulses of that cycle only.
module tb_cam_array;
  localparam int NN = 8, W = 4;
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

  logic ev_valid = 0, ev_ready, we = 0, we_ready, preb, check_o;
  logic [9:0] ev_data = '0, w_tag = '0;
  logic [2:0] w_neuron = '0;
  logic [1:0] w_word = '0, w_type = '0;
  logic [NN-1:0] match;
  logic [1:0] match_type [NN];
  cam_array #(.NEURONS(NN), .WORDS(W), .TAG_W(10)) dut (
    .clk, .rst_n, .ev_valid, .ev_ready, .ev_data, .we, .we_ready, .w_neuron, .w_word, .w_tag,
    .w_type, .match, .match_type, .preb, .check(check_o));

  logic [9:0] ref_tag [NN][W];
  logic [1:0] ref_type [NN][W];
  int total_hits = 0;

  task automatic write_word(int n, int w, logic [9:0] t, logic [1:0] ty);
    @(negedge clk);
    we = 1; w_neuron = 3'(n); w_word = 2'(w); w_tag = t; w_type = ty;
    @(negedge clk) we = 0;
    ref_tag[n][w] = t; ref_type[n][w] = ty;
  endtask

  // blocked_word: visit index during which a write is made (-1: none)
  task automatic broadcast(logic [9:0] t, int blocked_word);
    int cyc, pulses, exp_p, preb_up, check_up, preb_dn, check_dn, visit;
    bit done;
    @(negedge clk);
    ev_valid = 1; ev_data = t;
    do @(posedge clk); while (!ev_ready);
    #1 ev_valid = 0;
    cyc = 0; pulses = 0; exp_p = 0; preb_up = -1; check_up = -1; preb_dn = -1; check_dn = -1;
    done = 0; visit = 0;
    while (!done && cyc < 50) begin
      @(negedge clk);
      if (preb && !check_o && visit == blocked_word) begin
        // rewrite a word with its own contents: no change, pulses blocked
        we = 1; w_neuron = 3'd7; w_word = 2'd3; w_tag = ref_tag[7][3]; w_type = ref_type[7][3];
      end
      #1;
      if (preb && preb_up < 0) preb_up = cyc;
      if (check_o && check_up < 0) check_up = cyc;
      if (!preb && preb_up >= 0 && preb_dn < 0) preb_dn = cyc;
      if (!check_o && check_up >= 0 && check_dn < 0) check_dn = cyc;
      for (int n = 0; n < NN; n++) begin
        bit e;
        e = preb && !check_o && visit < W && visit != blocked_word && ref_tag[n][visit] == t;
        if (e) exp_p++;
        if (match[n] !== e) check(0, $sformatf("match[%0d] word %0d tag %0d", n, visit, t));
        if (match[n]) begin
          pulses++;
          if (visit < W && match_type[n] !== ref_type[n][visit]) check(0, "match type");
        end
      end
      if (preb && !check_o) visit++;
      @(posedge clk);
      #1;
      we = 0;
      cyc++;
      if (ev_ready) done = 1;
    end
    if (!check_o && check_up >= 0 && check_dn < 0) check_dn = cyc;
    check(preb_up >= 0 && check_up > preb_up && preb_dn > check_up && check_dn > preb_dn,
          $sformatf("PreB/Check order %0d %0d %0d %0d", preb_up, check_up, preb_dn, check_dn));
    check(check_up - preb_up == W, $sformatf("visited %0d words", check_up - preb_up));
    check(cyc == W + 3, $sformatf("broadcast took %0d cycles, expected %0d", cyc, W + 3));
    check(pulses == exp_p, $sformatf("tag %0d: %0d pulses, expected %0d", t, pulses, exp_p));
    total_hits += pulses;
  endtask

  initial begin
    int t;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    t = 0;
    #1;
    while (!we_ready) begin
      check(!ev_ready, "no event during the clearing sweep");
      @(posedge clk); #1; t++;
    end
    check(t == W, $sformatf("clearing sweep took %0d cycles", t));
    for (int n = 0; n < NN; n++) for (int w = 0; w < W; w++) begin
      ref_tag[n][w] = '0; ref_type[n][w] = '0;
    end
    broadcast(10'd0, -1);
    check(total_hits == NN * W, "all words answer tag 0 after the sweep");
    for (int n = 0; n < NN; n++) for (int w = 0; w < W; w++)
      write_word(n, w, 10'($urandom_range(1, 6)), 2'($urandom));
    total_hits = 0;
    for (int i = 0; i < 60; i++) broadcast(10'($urandom_range(0, 8)), -1);
    check(total_hits > 0, "some words matched");
    for (int b = 0; b < W; b++) broadcast(ref_tag[0][b], b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
