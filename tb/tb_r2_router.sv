// tb_r2_router: self-checking test of the R2 router.
// Random packets enter from the four R1 inputs, the interface input and the
// R3 input at once, with random stalls on all outputs. Reference: a packet
// from R1 or the interface with zero chip offset goes to every core in its
// mask; one with a non-zero offset goes to R3 unchanged; a packet from R3
// goes to every core in its mask. Every packet carries a unique tag, and
// each expected (output, tag) delivery must happen exactly once.
module tb_r2_router;
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

  logic [3:0] r1_in_valid = '0, r1_in_ready, r1_out_valid, r1_out_ready = '0;
  route_pkt_t r1_in_data [4], r1_out_data [4];
  logic if_in_valid = 0, if_in_ready, r3_in_valid = 0, r3_in_ready, r3_out_valid, r3_out_ready = 0;
  route_pkt_t if_in_data, r3_in_data, r3_out_data;
  r2_router dut (.*);

  // expected deliveries: out index 0..3 cores, 4 R3; key = tag
  int exp_cnt [5][1024];
  route_pkt_t exp_pkt [1024];
  int n_expected = 0, n_got = 0;
  int next_tag = 0;

  function automatic route_pkt_t make_pkt(bit remote_ok);
    route_pkt_t p;
    p = route_pkt_t'($urandom);
    p.tag = 10'(next_tag); next_tag++;
    if (!remote_ok || $urandom_range(0, 1) == 0) begin p.dx = 0; p.dy = 0; end
    else if (p.dx == 0 && p.dy == 0) p.dy = 2'd1;
    return p;
  endfunction

  function automatic void expect_pkt(route_pkt_t p, bit from_r3);
    exp_pkt[p.tag] = p;
    if (!from_r3 && !(p.dx == 0 && p.dy == 0)) begin exp_cnt[4][p.tag]++; n_expected++; end
    else for (int c = 0; c < 4; c++) if (p.core_mask[c]) begin exp_cnt[c][p.tag]++; n_expected++; end
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) if (r1_out_valid[c] && r1_out_ready[c]) begin
      check(exp_cnt[c][r1_out_data[c].tag] == 1 && r1_out_data[c] == exp_pkt[r1_out_data[c].tag],
            $sformatf("core %0d got tag %0d", c, r1_out_data[c].tag));
      exp_cnt[c][r1_out_data[c].tag]--; n_got++;
    end
    if (r3_out_valid && r3_out_ready) begin
      check(exp_cnt[4][r3_out_data.tag] == 1 && r3_out_data == exp_pkt[r3_out_data.tag],
            $sformatf("R3 got tag %0d", r3_out_data.tag));
      exp_cnt[4][r3_out_data.tag]--; n_got++;
    end
  end
  always @(negedge clk) begin
    r1_out_ready <= 4'($urandom);
    r3_out_ready <= ($urandom_range(0, 2) != 0);
  end

  for (genvar i = 0; i < 6; i++) begin : g_src
    initial begin
      wait (rst_n);
      for (int k = 0; k < 40; k++) begin
        route_pkt_t p;
        @(negedge clk);
        while ($urandom_range(0, 2) == 0) @(negedge clk);
        p = make_pkt(i != 5);
        expect_pkt(p, i == 5);
        if (i < 4) begin r1_in_valid[i] = 1; r1_in_data[i] = p; end
        else if (i == 4) begin if_in_valid = 1; if_in_data = p; end
        else begin r3_in_valid = 1; r3_in_data = p; end
        do @(posedge clk);
        while (!((i < 4 && r1_in_ready[i]) || (i == 4 && if_in_ready) || (i == 5 && r3_in_ready)));
        @(negedge clk);
        if (i < 4) r1_in_valid[i] = 0; else if (i == 4) if_in_valid = 0; else r3_in_valid = 0;
      end
    end
  end

  initial begin
    for (int o = 0; o < 5; o++) for (int t = 0; t < 1024; t++) exp_cnt[o][t] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (next_tag == 240);
    repeat (200) @(posedge clk);
    check(n_got == n_expected && n_expected > 240, $sformatf("delivered %0d of %0d", n_got, n_expected));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
