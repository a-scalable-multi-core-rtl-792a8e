// tb_dynaps_chip_full: self-checking test of one chip at full size (4 cores
// of 16 x 16 neurons, 64 words per neuron, 1024-word source memories), with
// no parameter overrides. Its mesh outputs are looped back to its own
// inputs (east out to west in, north out to south in), so a packet sent
// one chip east or north comes back to this chip through R3.
// Through the host input it waits out the clearing sweep, programs a few
// CAM words and the four source-memory words of one neuron (own core, two
// other cores, one hop east, one hop north), then makes that neuron spike
// three times and an unprogrammed neuron (empty words) spike once. Checks
// the pulses of all 1024 neurons and all four synapse types against the
// expected ones, and that every other word stays silent.
module tb_dynaps_chip_full;
  import dynaps_pkg::*;
  localparam int NN = 256;
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

  logic        hv = 1'b0, hr;
  logic [33:0] hd = '0;
  logic [3:0]  miv, mir, mov, mor;
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
    .clk, .rst_n, .chip_id(3'd2),
    .fpga_in_valid(hv), .fpga_in_ready(hr), .fpga_in_data(hd),
    .mesh_in_valid(miv), .mesh_in_ready(mir), .mesh_in_data(mid),
    .mesh_out_valid(mov), .mesh_out_ready(mor), .mesh_out_data(mod_),
    .nrn_req(req), .nrn_ack(ack), .syn_pulse(pulse),
    .cam_preb(preb), .cam_check(chk),
    .bias_valid(bv), .bias_ready(br), .bias_data(bd),
    .conf_valid(cv), .conf_ready(cr), .conf_data(cd));

  // loopback: 0 north, 1 south, 2 east, 3 west
  assign miv = {mov[2], mov[3], mov[0], mov[1]};
  assign mor = {mir[2], mir[3], mir[0], mir[1]};
  always_comb begin
    mid[3] = mod_[2]; mid[2] = mod_[3]; mid[1] = mod_[0]; mid[0] = mod_[1];
  end

  int pulse_sum [4][NN][4];
  int exp_sum [4][NN][4];
  int n_loop = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) for (int n = 0; n < NN; n++) for (int t = 0; t < 4; t++)
      if (pulse[c][n][t]) pulse_sum[c][n][t]++;
    if (mov[2] && mor[2]) n_loop++;
    if (mov[0] && mor[0]) n_loop++;
  end

  task automatic host(logic [33:0] w);
    @(negedge clk);
    hv = 1'b1; hd = w;
    do @(posedge clk); while (!hr);
    @(negedge clk) hv = 1'b0;
  endtask

  task automatic cam(int c, int n, int w, logic [9:0] tag, logic [1:0] ty);
    host({3'd2, 1'b0, 2'(c), 1'b0, 8'(n), 6'(w), tag, ty, 1'b0});
  endtask

  task automatic sram(int c, int n, int s, route_pkt_t p);
    logic [19:0] v;
    v = p;
    host({3'd2, 1'b0, 2'(c), 1'b1, 8'(n), 2'(s), 1'b0, 6'd0, v[9:0]});
    host({3'd2, 1'b0, 2'(c), 1'b1, 8'(n), 2'(s), 1'b1, 6'd0, v[19:10]});
  endtask

  task automatic spike(int c, int n);
    @(negedge clk) req[c][n] = 1'b1;
    do @(posedge clk); while (!ack[c][n]);
    @(negedge clk) req[c][n] = 1'b0;
    do @(posedge clk); while (ack[c][n]);
  endtask

  initial begin
    route_pkt_t p;
    int t;
    for (int c = 0; c < 4; c++) begin
      req[c] = '0;
      for (int n = 0; n < NN; n++) for (int k = 0; k < 4; k++) begin
        pulse_sum[c][n][k] = 0; exp_sum[c][n][k] = 0;
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // the host word waits in the input buffer until the memories are clear
    t = 0;
    while (!dut.prg_ready[0]) begin @(posedge clk); t++; end
    check(t >= 1024 && t <= 1026, $sformatf("clearing sweep %0d cycles", t));
    // CAM words
    cam(0, 17, 63, 10'd100, 2'd1);   exp_sum[0][17][1]  += 3;  // own-core word
    cam(0, 18, 0, 10'd100, 2'd0);    exp_sum[0][18][0]  += 3;
    cam(1, 255, 0, 10'd200, 2'd3);   exp_sum[1][255][3] += 3;  // via R2
    cam(2, 128, 10, 10'd200, 2'd0);  exp_sum[2][128][0] += 3;
    cam(2, 128, 11, 10'd200, 2'd0);  exp_sum[2][128][0] += 3;  // two words, same type
    cam(3, 0, 31, 10'd300, 2'd2);    exp_sum[3][0][2]   += 3;  // one hop east and back
    cam(0, 200, 5, 10'd400, 2'd3);   exp_sum[0][200][3] += 3;  // one hop north and back
    cam(3, 77, 40, 10'd999, 2'd1);                              // never sent
    // source memory of core 0 neuron 5
    p = '0; p.tag = 10'd100; p.core_mask = 4'b0001;                           sram(0, 5, 3, p);
    p = '0; p.tag = 10'd200; p.core_mask = 4'b0110;                           sram(0, 5, 2, p);
    p = '0; p.tag = 10'd300; p.core_mask = 4'b1000; p.dx = 2'd1; p.sx = 1'b1; sram(0, 5, 1, p);
    p = '0; p.tag = 10'd400; p.core_mask = 4'b0001; p.dy = 2'd1; p.sy = 1'b1; sram(0, 5, 0, p);
    repeat (3) spike(0, 5);
    spike(3, 250);
    repeat (1500) @(posedge clk);
    for (int c = 0; c < 4; c++) for (int n = 0; n < NN; n++) for (int k = 0; k < 4; k++)
      if (pulse_sum[c][n][k] != exp_sum[c][n][k] || exp_sum[c][n][k] != 0)
        check(pulse_sum[c][n][k] == exp_sum[c][n][k],
              $sformatf("core %0d neuron %0d type %0d: %0d pulses expected %0d", c, n, k, pulse_sum[c][n][k], exp_sum[c][n][k]));
    check(n_loop == 6, $sformatf("%0d packets through the mesh loop, expected 6", n_loop));
    check(dut.g_core[3].u_r1.u_sram.clr_q == 1'b0, "memories clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
