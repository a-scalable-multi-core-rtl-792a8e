// tb_dynaps_chip: end-to-end self-checking test of two chips (4 x 4 neurons
// per core, 8 words per neuron) side by side in the mesh: chip 0 to the
// west, chip 1 to the east, joined by their east/west links (with random
// stalls). Through the 34-bit host input it programs every CAM word and
// every source-memory word of both chips, sends bias and configuration
// words, words for a chip id that is not on the board, and event packets
// injected into R2. Then random neurons of every core spike. A reference
// model predicts, per core, how many times each tag must be broadcast to
// the core, and from the CAM contents the number of pulses per neuron and
// synapse type. Routing words are of five kinds: to the own core only
// (R1 local path), to other cores of the same chip (through R2), to the
// other chip (through R3, one hop east or west), leaving the board
// northward (one hop), and empty (dropped by R1).
// Every mechanism is counted and each count must be non-zero.
module tb_dynaps_chip;
  import dynaps_pkg::*;
  localparam int R = 4, C = 4, NN = R * C, W = 8, NT = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("A up %b/%b dn %b/%b r3in %b/%b r3out %b/%b ifr2 %b/%b", g_chip[0].dut.up_valid, g_chip[0].dut.up_ready, g_chip[0].dut.dn_valid, g_chip[0].dut.dn_ready, g_chip[0].dut.r3_in_valid, g_chip[0].dut.r3_in_ready, g_chip[0].dut.r3_out_valid, g_chip[0].dut.r3_out_ready, g_chip[0].dut.if_r2_valid, g_chip[0].dut.if_r2_ready);
    $display("B up %b/%b dn %b/%b r3in %b/%b r3out %b/%b", g_chip[1].dut.up_valid, g_chip[1].dut.up_ready, g_chip[1].dut.dn_valid, g_chip[1].dut.dn_ready, g_chip[1].dut.r3_in_valid, g_chip[1].dut.r3_in_ready, g_chip[1].dut.r3_out_valid, g_chip[1].dut.r3_out_ready);
    $display("A c0 bc %b/%b enc %b/%b  c1 bc %b/%b enc %b/%b", g_chip[0].dut.g_core[0].bc_valid, g_chip[0].dut.g_core[0].bc_ready, g_chip[0].dut.g_core[0].enc_valid, g_chip[0].dut.g_core[0].enc_ready, g_chip[0].dut.g_core[1].bc_valid, g_chip[0].dut.g_core[1].bc_ready, g_chip[0].dut.g_core[1].enc_valid, g_chip[0].dut.g_core[1].enc_ready);
    $display("R1 mgv %b mgr %b mg %b/%b buf %b/%b sp0 %b/%b sp1 %b/%b cp %b/%b dec %b/%b lock %b %0d", g_chip[0].dut.g_core[0].u_r1.mg_in_valid, g_chip[0].dut.g_core[0].u_r1.mg_in_ready, g_chip[0].dut.g_core[0].u_r1.mg_valid, g_chip[0].dut.g_core[0].u_r1.mg_ready, g_chip[0].dut.g_core[0].u_r1.buf_valid, g_chip[0].dut.g_core[0].u_r1.buf_ready, g_chip[0].dut.g_core[0].u_r1.sp0_valid, g_chip[0].dut.g_core[0].u_r1.sp0_ready, g_chip[0].dut.g_core[0].u_r1.sp1_valid, g_chip[0].dut.g_core[0].u_r1.sp1_ready, g_chip[0].dut.g_core[0].u_r1.cp_valid, g_chip[0].dut.g_core[0].u_r1.cp_ready, g_chip[0].dut.g_core[0].u_r1.dec_valid, g_chip[0].dut.g_core[0].u_r1.dec_ready, g_chip[0].dut.g_core[0].u_r1.u_mg.lock_q, g_chip[0].dut.g_core[0].u_r1.u_mg.lock_idx_q);
    $display("watchdog expired: cam_prg=%0d sram_prg=%0d spikes=%0d got=%0d exp=%0d", n_cam_prg, n_sram_prg, n_spikes, got_total, exp_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- two chips ----
  logic        hv [2], hr [2];
  logic [33:0] hd [2];
  logic [3:0]  miv [2], mir [2], mov [2], mor [2];
  route_pkt_t  mid [2][4];
  route_pkt_t  mod_ [2][4];
  logic [NN-1:0] req [2][4];
  logic [NN-1:0] ack [2][4];
  logic [3:0]  pulse [2][4][NN];
  logic [3:0]  preb [2], chk [2];
  logic [1:0]  bv [2], br [2];
  logic [22:0] bd [2];
  logic [3:0]  cv [2], cr [2];
  logic [11:0] cd [2];
  logic        gate_ab = 1'b1, gate_ba = 1'b1;

  for (genvar k = 0; k < 2; k++) begin : g_chip
    dynaps_chip #(.ROWS(R), .COLS(C), .WORDS(W)) dut (
      .clk, .rst_n, .chip_id(3'(k)),
      .fpga_in_valid(hv[k]), .fpga_in_ready(hr[k]), .fpga_in_data(hd[k]),
      .mesh_in_valid(miv[k]), .mesh_in_ready(mir[k]), .mesh_in_data(mid[k]),
      .mesh_out_valid(mov[k]), .mesh_out_ready(mor[k]), .mesh_out_data(mod_[k]),
      .nrn_req(req[k]), .nrn_ack(ack[k]), .syn_pulse(pulse[k]),
      .cam_preb(preb[k]), .cam_check(chk[k]),
      .bias_valid(bv[k]), .bias_ready(br[k]), .bias_data(bd[k]),
      .conf_valid(cv[k]), .conf_ready(cr[k]), .conf_data(cd[k]));
  end

  // mesh: chip 0 east (2) <-> chip 1 west (3); other links open, north and
  // south outputs always ready (they leave the board)
  assign miv[1] = {mov[0][2] && gate_ab, 3'b000};
  assign miv[0] = {1'b0, mov[1][3] && gate_ba, 2'b00};
  assign mor[0] = {1'b1, mir[1][3] && gate_ab, 2'b11};
  assign mor[1] = {mir[0][2] && gate_ba, 3'b111};
  always_comb begin
    for (int k = 0; k < 2; k++) for (int p = 0; p < 4; p++) mid[k][p] = '0;
    mid[1][3] = mod_[0][2];
    mid[0][2] = mod_[1][3];
  end

  // ---- reference model ----
  logic [9:0] cam_tag [2][4][NN][W];
  logic [1:0] cam_type [2][4][NN][W];
  route_pkt_t sram [2][4][NN][4];
  int exp_cnt [2][4][1024];
  int got_cnt [2][4][1024];
  int exp_off [2], got_off [2];
  int exp_total = 0, got_total = 0;
  int pulse_sum [2][4][NN][4];
  logic [22:0] exp_bias [2][2][$];
  logic [11:0] exp_conf [2][4][$];

  // mechanism counters
  int n_cam_prg = 0, n_sram_prg = 0, n_bias = 0, n_conf = 0, n_foreign = 0, n_if_event = 0;
  int n_spikes = 0, n_local = 0, n_to_r2 = 0, n_empty_drop = 0, n_r2_to_core = 0;
  int n_r3_hops = 0, n_r3_to_r2 = 0, n_offboard = 0, n_contention = 0, n_link_stall = 0;
  int n_r1_merge = 0, n_pulses = 0, n_broadcasts = 0;

  function automatic void add_expect(int k, route_pkt_t p);
    if (p.dx == 0 && p.dy == 0) begin
      for (int c = 0; c < 4; c++) if (p.core_mask[c]) begin exp_cnt[k][c][p.tag]++; exp_total++; end
    end else if (p.dy != 0) begin
      exp_off[k]++;
    end else begin
      for (int c = 0; c < 4; c++) if (p.core_mask[c]) begin exp_cnt[1-k][c][p.tag]++; exp_total++; end
    end
  endfunction

  // deliveries, pulses and mechanism probes
  for (genvar k = 0; k < 2; k++) begin : g_probe
    for (genvar c = 0; c < 4; c++) begin : g_core
      always @(posedge clk) if (rst_n) begin
        if (g_chip[k].dut.g_core[c].bc_valid && g_chip[k].dut.g_core[c].bc_ready) begin
          int t;
          t = int'(g_chip[k].dut.g_core[c].bc_data);
          if (t < NT) got_cnt[k][c][t]++;
          else check(0, $sformatf("chip %0d core %0d: unexpected tag %0d", k, c, t));
          got_total++;
          n_broadcasts++;
        end
        if (g_chip[k].dut.g_core[c].u_r1.csp_valid[1] && g_chip[k].dut.g_core[c].u_r1.csp_ready[1]) n_local++;
        if (g_chip[k].dut.g_core[c].u_r1.csp_valid[2] && g_chip[k].dut.g_core[c].u_r1.csp_ready[2]) n_empty_drop++;
        if (g_chip[k].dut.up_valid[c] && g_chip[k].dut.up_ready[c]) n_to_r2++;
        if (g_chip[k].dut.dn_valid[c] && g_chip[k].dut.dn_ready[c]) n_r2_to_core++;
        if (g_chip[k].dut.g_core[c].u_r1.u_mg_out.in_valid == 2'b11) n_r1_merge++;
        for (int n = 0; n < NN; n++) for (int ty = 0; ty < 4; ty++)
          if (pulse[k][c][n][ty]) begin pulse_sum[k][c][n][ty]++; n_pulses++; end
      end
    end
    always @(posedge clk) if (rst_n) begin
      if ($countones(g_chip[k].dut.up_valid) >= 2) n_contention++;
      if (g_chip[k].dut.r3d_valid && g_chip[k].dut.r3d_ready) n_r3_to_r2++;
      if (mov[k][0] && mor[k][0]) begin
        got_off[k]++; n_offboard++;
        check(mod_[k][0].dy == 0 && mod_[k][0].dx == 0 && mod_[k][0].sy, "off-board packet offset");
      end
      if (mov[k][1] || (mov[k][2] && k == 1) || (mov[k][3] && k == 0)) check(0, "no packet on an open link");
      for (int b = 0; b < 2; b++) if (bv[k][b] && br[k][b]) begin
        check(exp_bias[k][b].size() > 0 && bd[k] == exp_bias[k][b][0], "bias word");
        if (exp_bias[k][b].size() > 0) void'(exp_bias[k][b].pop_front());
        n_bias++;
      end
      for (int c = 0; c < 4; c++) if (cv[k][c] && cr[k][c]) begin
        check(exp_conf[k][c].size() > 0 && cd[k] == exp_conf[k][c][0], "conf word");
        if (exp_conf[k][c].size() > 0) void'(exp_conf[k][c].pop_front());
        n_conf++;
      end
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (mov[0][2] && mor[0][2]) n_r3_hops++;
    if (mov[1][3] && mor[1][3]) n_r3_hops++;
    if ((mov[0][2] && !mor[0][2]) || (mov[1][3] && !mor[1][3])) n_link_stall++;
  end
  always @(negedge clk) begin
    for (int k = 0; k < 2; k++) begin br[k] <= 2'($urandom); cr[k] <= 4'($urandom); end
    gate_ab <= ($urandom_range(0, 3) != 0);
    gate_ba <= ($urandom_range(0, 3) != 0);
  end

  // ---- host ----
  task automatic host(int k, logic [33:0] w);
    @(negedge clk);
    hv[k] = 1'b1; hd[k] = w;
    do @(posedge clk); while (!hr[k]);
    @(negedge clk) hv[k] = 1'b0;
  endtask

  function automatic route_pkt_t make_word(int k, int c);
    route_pkt_t p;
    int kind;
    p = '0;
    p.tag = 10'($urandom_range(1, NT - 1));
    kind = $urandom_range(0, 9);
    if (kind < 3) p.core_mask = 4'(1 << c);                       // own core only
    else if (kind < 5) begin                                       // other cores
      do p.core_mask = 4'($urandom_range(1, 15)); while (p.core_mask == 4'(1 << c));
    end else if (kind < 7) begin                                   // other chip
      p.core_mask = 4'($urandom_range(1, 15)); p.dx = 2'd1; p.sx = (k == 0);
    end else if (kind < 8) begin                                   // off board, north
      p.core_mask = 4'($urandom_range(1, 15)); p.dy = 2'd1; p.sy = 1'b1;
    end                                                            // else empty
    return p;
  endfunction

  task automatic program_chip(int k);
    for (int c = 0; c < 4; c++)
      for (int n = 0; n < NN; n++) begin
        for (int w = 0; w < W; w++) begin
          cam_tag[k][c][n][w] = 10'($urandom_range(1, NT - 1));
          cam_type[k][c][n][w] = 2'($urandom);
          host(k, {3'(k), 1'b0, 2'(c), 1'b0, 8'(n), 6'(w), cam_tag[k][c][n][w], cam_type[k][c][n][w], 1'b0});
          n_cam_prg++;
        end
        for (int s = 0; s < 4; s++) begin
          logic [19:0] p;
          sram[k][c][n][s] = make_word(k, c);
          p = sram[k][c][n][s];
          host(k, {3'(k), 1'b0, 2'(c), 1'b1, 8'(n), 2'(s), 1'b0, 6'd0, p[9:0]});
          host(k, {3'(k), 1'b0, 2'(c), 1'b1, 8'(n), 2'(s), 1'b1, 6'd0, p[19:10]});
          n_sram_prg++;
        end
      end
    for (int i = 0; i < 6; i++) begin
      logic [22:0] b; logic [11:0] cf; int g, c;
      b = 23'($urandom); g = $urandom_range(0, 1);
      exp_bias[k][g].push_back(b);
      host(k, {3'(k), 1'b1, 1'b1, 1'(g), 5'd0, b});
      cf = 12'($urandom); c = $urandom_range(0, 3);
      exp_conf[k][c].push_back(cf);
      host(k, {3'(k), 1'b1, 1'b0, 1'b0, 2'(c), 14'd0, cf});
      host(k, {3'(5 + k), 31'($urandom)});   // no chip with this id
      n_foreign++;
    end
  endtask

  task automatic spike(int k, int c, int n);
    @(negedge clk) req[k][c][n] = 1'b1;
    do @(posedge clk); while (!ack[k][c][n]);
    @(negedge clk) req[k][c][n] = 1'b0;
    do @(posedge clk); while (ack[k][c][n]);
  endtask

  initial begin
    for (int k = 0; k < 2; k++) begin
      hv[k] = 0; hd[k] = '0; exp_off[k] = 0; got_off[k] = 0;
      for (int c = 0; c < 4; c++) begin
        req[k][c] = '0;
        for (int t = 0; t < 1024; t++) begin exp_cnt[k][c][t] = 0; got_cnt[k][c][t] = 0; end
        for (int n = 0; n < NN; n++) for (int ty = 0; ty < 4; ty++) pulse_sum[k][c][n][ty] = 0;
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    fork
      program_chip(0);
      program_chip(1);
    join
    // events injected by the host into R2 (chip 0): local cores and chip 1
    for (int i = 0; i < 8; i++) begin
      route_pkt_t p;
      p = '0;
      p.tag = 10'($urandom_range(1, NT - 1));
      p.core_mask = 4'($urandom_range(1, 15));
      if (i % 2 == 1) begin p.dx = 2'd1; p.sx = 1'b1; end
      add_expect(0, p);
      host(0, {3'd0, 1'b1, 1'b0, 1'b1, 8'd0, p});
      n_if_event++;
    end
    // spikes: every core of both chips, random neurons, in parallel
    for (int k = 0; k < 2; k++) for (int c = 0; c < 4; c++) begin
      fork
        automatic int kk = k, cc = c;
        begin
          repeat (10) begin
            int n;
            n = $urandom_range(0, NN - 1);
            repeat ($urandom_range(0, 20)) @(posedge clk);
            for (int s = 0; s < 4; s++) add_expect(kk, sram[kk][cc][n][s]);
            spike(kk, cc, n);
            n_spikes++;
          end
        end
      join_none
    end
    wait fork;
    begin
      int t;
      t = 0;
      while ((got_total < exp_total || got_off[0] < exp_off[0] || got_off[1] < exp_off[1]) && t < 20000) begin
        @(posedge clk); t++;
      end
    end
    repeat (200) @(posedge clk);
    for (int k = 0; k < 2; k++) begin
      check(got_off[k] == exp_off[k], $sformatf("chip %0d off-board %0d expected %0d", k, got_off[k], exp_off[k]));
      for (int c = 0; c < 4; c++) begin
        for (int t = 0; t < NT; t++)
          check(got_cnt[k][c][t] == exp_cnt[k][c][t],
                $sformatf("chip %0d core %0d tag %0d: %0d broadcasts expected %0d", k, c, t, got_cnt[k][c][t], exp_cnt[k][c][t]));
        for (int n = 0; n < NN; n++) for (int ty = 0; ty < 4; ty++) begin
          int e;
          e = 0;
          for (int w = 0; w < W; w++)
            if (cam_type[k][c][n][w] == 2'(ty)) e += exp_cnt[k][c][cam_tag[k][c][n][w]];
          check(pulse_sum[k][c][n][ty] == e,
                $sformatf("chip %0d core %0d neuron %0d type %0d: %0d pulses expected %0d", k, c, n, ty, pulse_sum[k][c][n][ty], e));
        end
      end
      for (int b = 0; b < 2; b++) check(exp_bias[k][b].size() == 0, "all bias words delivered");
      for (int c = 0; c < 4; c++) check(exp_conf[k][c].size() == 0, "all conf words delivered");
    end
    $display("mechanisms: cam_prg=%0d sram_prg=%0d bias=%0d conf=%0d foreign_dropped=%0d if_to_r2=%0d",
             n_cam_prg, n_sram_prg, n_bias, n_conf, n_foreign, n_if_event);
    $display("mechanisms: spikes=%0d r1_local=%0d r1_to_r2=%0d r1_empty_drop=%0d r2_to_core=%0d r3_hops=%0d r3_to_r2=%0d offboard=%0d",
             n_spikes, n_local, n_to_r2, n_empty_drop, n_r2_to_core, n_r3_hops, n_r3_to_r2, n_offboard);
    $display("mechanisms: r2_contention=%0d r1_merge_contention=%0d link_stalls=%0d broadcasts=%0d pulses=%0d",
             n_contention, n_r1_merge, n_link_stall, n_broadcasts, n_pulses);
    check(n_cam_prg > 0 && n_sram_prg > 0 && n_bias > 0 && n_conf > 0 && n_foreign > 0 && n_if_event > 0, "host mechanisms");
    check(n_spikes > 0 && n_local > 0 && n_to_r2 > 0 && n_empty_drop > 0 && n_r2_to_core > 0, "R1/R2 mechanisms");
    check(n_r3_hops > 0 && n_r3_to_r2 > 0 && n_offboard > 0, "R3 mechanisms");
    check(n_contention > 0 && n_r1_merge > 0 && n_link_stall > 0, "contention and back-pressure");
    check(n_broadcasts == exp_total && n_pulses > 0, "broadcasts and pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
