// tb_workload_cnn: the convolution layer of the poker-card suit network on
// one full-size chip (default parameters). The network's 32 x 32 input is
// convolved by four 8 x 8 kernels with stride 2 into four 16 x 16 feature
// maps, one map per core. Convolution neuron (i, j) listens to input pixel
// (2i + ky - 3, 2j + kx - 3) in CAM word ky*8 + kx; the sign of the kernel
// weight at (ky, kx) picks the synapse type (vertical edge, horizontal edge
// and two diagonal kernels). The input pixel's tag is its index y*32 + x.
// Word positions that fall outside the image stay unprogrammed (tag 0), so
// the input is a 31 x 31 patch in rows and columns 1..31 and pixel 0 never
// fires.
// Phase 1 programs the CAMs through the host input and sends a burst of
// input events as host events with core mask 1111 (all four maps). It checks
// the pulses of every neuron and synapse type against a direct convolution
// of the event list, and the broadcast rate: one event per WORDS + 3 cycles
// when the input is kept full.
// Phase 2 programs each convolution neuron's first source word to reach its
// 2 x 2 pooling neuron on the chip one hop east (pooling maps are tagged
// 1..64 per core), makes random convolution neurons spike, and checks every
// packet that leaves through the east mesh port.
module tb_workload_cnn;
  import dynaps_pkg::*;
  localparam int NN = 256, W = 64, NEV = 300, NSP = 60;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic        hv = 1'b0, hr;
  logic [33:0] hd = '0;
  logic [3:0]  miv = '0, mir, mov, mor = 4'b1111;
  route_pkt_t  mid [4];
  route_pkt_t  mod_ [4];
  logic [NN-1:0] req [4];
  logic [NN-1:0] ack [4];
  logic [3:0]  pulse [4][NN];
  logic [3:0]  preb, chk;
  logic [1:0]  bv, br = 2'b11;
  logic [22:0] bd;
  logic [3:0]  cv, cr = 4'b1111;
  logic [11:0] cd;

  dynaps_chip dut (
    .clk, .rst_n, .chip_id(3'd1),
    .fpga_in_valid(hv), .fpga_in_ready(hr), .fpga_in_data(hd),
    .mesh_in_valid(miv), .mesh_in_ready(mir), .mesh_in_data(mid),
    .mesh_out_valid(mov), .mesh_out_ready(mor), .mesh_out_data(mod_),
    .nrn_req(req), .nrn_ack(ack), .syn_pulse(pulse),
    .cam_preb(preb), .cam_check(chk),
    .bias_valid(bv), .bias_ready(br), .bias_data(bd),
    .conf_valid(cv), .conf_ready(cr), .conf_data(cd));

  always_comb for (int d = 0; d < 4; d++) mid[d] = '0;

  // synapse type of kernel m at (ky, kx): positive weights excitatory,
  // negative ones inhibitory
  function automatic logic [1:0] ktype(int m, int ky, int kx);
    case (m)
      0:       return (kx < 4) ? 2'd0 : 2'd2;        // vertical edge
      1:       return (ky < 4) ? 2'd0 : 2'd2;        // horizontal edge
      2:       return (ky + kx < 8) ? 2'd1 : 2'd3;   // upward vertex
      default: return (ky > kx) ? 2'd1 : 2'd3;       // downward vertex
    endcase
  endfunction

  int pulse_sum [4][NN][4];
  int exp_sum [4][NN][4];
  int n_bcast = 0;
  logic preb0_d = 1'b0;
  int exp_out [4][65];
  int got_out [4][65];
  int n_out = 0, n_bad_port = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) for (int n = 0; n < NN; n++) for (int t = 0; t < 4; t++)
      if (pulse[c][n][t]) pulse_sum[c][n][t]++;
    preb0_d <= preb[0];
    if (preb[0] && !preb0_d) n_bcast++;
    if (mov[2] && mor[2]) begin
      n_out++;
      if (mod_[2].dx != 0 || mod_[2].dy != 0 || mod_[2].sx != 1'b1 ||
          $countones(mod_[2].core_mask) != 1 || mod_[2].tag == 0 || mod_[2].tag > 64)
        n_bad_port++;
      else
        for (int c = 0; c < 4; c++) if (mod_[2].core_mask[c]) got_out[c][7'(mod_[2].tag)]++;
    end
    if ((mov[0] && mor[0]) || (mov[1] && mor[1]) || (mov[3] && mor[3])) n_bad_port++;
  end

  task automatic host(logic [33:0] w);
    @(negedge clk);
    hv = 1'b1; hd = w;
    do @(posedge clk); while (!hr);
    @(negedge clk) hv = 1'b0;
  endtask

  task automatic spike(int c, int n);
    @(negedge clk) req[c][n] = 1'b1;
    do @(posedge clk); while (!ack[c][n]);
    @(negedge clk) req[c][n] = 1'b0;
    do @(posedge clk); while (ack[c][n]);
  endtask

  initial begin
    route_pkt_t p;
    logic [19:0] v;
    int y, x, t0, t1, nprg;
    int ev [NEV];
    for (int c = 0; c < 4; c++) begin
      req[c] = '0;
      for (int n = 0; n < NN; n++) for (int k = 0; k < 4; k++) begin
        pulse_sum[c][n][k] = 0; exp_sum[c][n][k] = 0;
      end
      for (int g = 0; g < 65; g++) begin exp_out[c][g] = 0; got_out[c][g] = 0; end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;

    // phase 1: receptive fields of the four maps
    nprg = 0;
    for (int m = 0; m < 4; m++)
      for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++)
        for (int ky = 0; ky < 8; ky++) for (int kx = 0; kx < 8; kx++) begin
          y = 2 * i + ky - 3; x = 2 * j + kx - 3;
          if (y >= 0 && y < 32 && x >= 0 && x < 32) begin
            host({3'd1, 1'b0, 2'(m), 1'b0, 8'(i * 16 + j), 6'(ky * 8 + kx),
                  10'(y * 32 + x), ktype(m, ky, kx), 1'b0});
            nprg++;
          end
        end
    $display("programmed %0d CAM words", nprg);
    check(n_bcast == 0, "no broadcast while programming");

    // input events in rows and columns 1..31, denser near the centre
    for (int e = 0; e < NEV; e++) begin
      y = 1 + $urandom_range(0, 15) + $urandom_range(0, 15);
      x = 1 + $urandom_range(0, 15) + $urandom_range(0, 15);
      ev[e] = y * 32 + x;
    end
    // expected pulses: direct convolution of the event list
    for (int e = 0; e < NEV; e++)
      for (int m = 0; m < 4; m++)
        for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
          int ky, kx;
          ky = ev[e] / 32 - 2 * i + 3; kx = ev[e] % 32 - 2 * j + 3;
          if (ky >= 0 && ky < 8 && kx >= 0 && kx < 8)
            exp_sum[m][i * 16 + j][ktype(m, ky, kx)]++;
        end
    t0 = -1;
    fork
      for (int e = 0; e < NEV; e++) begin
        p = '0; p.core_mask = 4'b1111; p.tag = 10'(ev[e]);
        host({3'd1, 1'b1, 1'b0, 1'b1, 8'd0, p});
      end
      begin
        wait (n_bcast == 1);
        t0 = int'($time / 10);
      end
    join
    wait (n_bcast == NEV);
    @(posedge clk);
    while (preb[0] || chk[0]) @(posedge clk);
    t1 = int'($time / 10);
    $display("%0d input events broadcast in %0d cycles (%0d per event)", NEV, t1 - t0, (t1 - t0) / NEV);
    check(t1 - t0 >= NEV * (W + 3) - 5 && t1 - t0 <= NEV * (W + 5),
          $sformatf("%0d cycles for %0d broadcasts, expected about %0d", t1 - t0, NEV, NEV * (W + 3)));
    for (int c = 0; c < 4; c++) for (int n = 0; n < NN; n++) for (int k = 0; k < 4; k++)
      check(pulse_sum[c][n][k] == exp_sum[c][n][k],
            $sformatf("map %0d neuron %0d type %0d: %0d pulses expected %0d", c, n, k, pulse_sum[c][n][k], exp_sum[c][n][k]));

    // phase 2: convolution neuron (i, j) of map m -> pooling neuron (i/2, j/2)
    // of map m on the chip one hop east
    for (int m = 0; m < 4; m++)
      for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
        p = '0; p.sx = 1'b1; p.dx = 2'd1; p.core_mask = 4'(1 << m);
        p.tag = 10'((i / 2) * 8 + j / 2 + 1);
        v = p;
        host({3'd1, 1'b0, 2'(m), 1'b1, 8'(i * 16 + j), 2'd3, 1'b0, 6'd0, v[9:0]});
        host({3'd1, 1'b0, 2'(m), 1'b1, 8'(i * 16 + j), 2'd3, 1'b1, 6'd0, v[19:10]});
      end
    for (int s = 0; s < NSP; s++) begin
      int m, n;
      m = $urandom_range(0, 3); n = $urandom_range(0, NN - 1);
      exp_out[m][(n / 32) * 8 + (n % 16) / 2 + 1]++;
      spike(m, n);
    end
    repeat (200) @(posedge clk);
    check(n_out == NSP, $sformatf("%0d packets left east, expected %0d", n_out, NSP));
    check(n_bad_port == 0, $sformatf("%0d malformed or misdirected packets", n_bad_port));
    for (int c = 0; c < 4; c++) for (int g = 1; g < 65; g++)
      check(got_out[c][g] == exp_out[c][g],
            $sformatf("pooling map %0d neuron %0d: %0d packets expected %0d", c, g - 1, got_out[c][g], exp_out[c][g]));
    check(n_bcast == NEV, "no broadcast from the convolution spikes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
