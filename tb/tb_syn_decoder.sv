// tb_syn_decoder: exhaustive self-checking test of the per-neuron pulse
// decoder: for every match bit and synapse type, exactly the bit of that
// type pulses when match is high and none when it is low.
module tb_syn_decoder;
  int checks = 0, failures = 0;
  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic       match;
  logic [1:0] syn_type;
  logic [3:0] pulse;
  syn_decoder dut (.*);

  initial begin
    for (int r = 0; r < 4; r++)
      for (int m = 0; m < 2; m++)
        for (int t = 0; t < 4; t++) begin
          match = m[0]; syn_type = 2'(t);
          #1;
          check(pulse == (m[0] ? 4'(1 << t) : 4'd0), $sformatf("match %0d type %0d: %b", m, t, pulse));
          check($countones(pulse) <= 1, "at most one synapse pulses");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
