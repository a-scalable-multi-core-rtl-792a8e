// tb_r3_router: self-checking test of the R3 mesh router.
// Random packets enter all five inputs at once with random stalls on all
// outputs. A reference written here from the XY rules predicts the output
// port and the decremented offsets:
//   from R2: dx != 0 -> sx ? east : west, dx-1; else dy != 0 -> sy ? north :
//            south, dy-1; else back to R2
//   from N/S: dy == 0 -> R2; else the opposite side, dy-1
//   from E/W: dx != 0 -> the opposite side, dx-1; else dy == 0 -> R2; else
//            sy ? north : south, dy-1
// Each packet has a unique tag; each must arrive once, on the predicted port.
module tb_r3_router;
  import dynaps_pkg::*;
  localparam int R2 = 0, PN = 1, PS = 2, PE = 3, PW = 4;
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

  logic [4:0] in_valid = '0, in_ready, out_valid, out_ready = '0;
  route_pkt_t in_data [5], out_data [5];
  r3_router dut (.*);

  int exp_port [1024];
  route_pkt_t exp_pkt [1024];
  int n_sent = 0, n_got = 0, next_tag = 0;
  int per_port [5];

  function automatic void predict(int src, route_pkt_t p);
    route_pkt_t q;
    int o;
    q = p;
    if (src == R2) begin
      if (p.dx != 0) begin o = p.sx ? PE : PW; q.dx = p.dx - 1; end
      else if (p.dy != 0) begin o = p.sy ? PN : PS; q.dy = p.dy - 1; end
      else o = R2;
    end else if (src == PN || src == PS) begin
      if (p.dy == 0) o = R2;
      else begin o = (src == PN) ? PS : PN; q.dy = p.dy - 1; end
    end else begin
      if (p.dx != 0) begin o = (src == PE) ? PW : PE; q.dx = p.dx - 1; end
      else if (p.dy == 0) o = R2;
      else begin o = p.sy ? PN : PS; q.dy = p.dy - 1; end
    end
    exp_port[p.tag] = o;
    exp_pkt[p.tag] = q;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) if (out_valid[o] && out_ready[o]) begin
      check(exp_port[out_data[o].tag] == o && out_data[o] == exp_pkt[out_data[o].tag],
            $sformatf("tag %0d on port %0d, expected port %0d", out_data[o].tag, o, exp_port[out_data[o].tag]));
      exp_port[out_data[o].tag] = -1;
      per_port[o]++;
      n_got++;
    end
  end
  always @(negedge clk) out_ready <= 5'($urandom);

  for (genvar i = 0; i < 5; i++) begin : g_src
    initial begin
      wait (rst_n);
      for (int k = 0; k < 60; k++) begin
        route_pkt_t p;
        @(negedge clk);
        p = route_pkt_t'($urandom);
        p.tag = 10'(next_tag); next_tag++;
        // a packet from a side never heads back the way it came
        if (i == PN || i == PS) begin p.dx = 0; p.sy = (i == PS); end
        if (i == PE || i == PW) p.sx = (i == PW);
        predict(i, p);
        in_valid[i] = 1; in_data[i] = p; n_sent++;
        do @(posedge clk); while (!in_ready[i]);
        @(negedge clk) in_valid[i] = 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (next_tag == 300);
    repeat (100) @(posedge clk);
    check(n_got == n_sent, $sformatf("delivered %0d of %0d", n_got, n_sent));
    for (int o = 0; o < 5; o++) check(per_port[o] > 0, $sformatf("port %0d used", o));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
