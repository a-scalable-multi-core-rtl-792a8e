// syn_decoder: the pulse decoder (DEC) of one neuron.
//
// A CAM word's match pulse is steered to one of the neuron's four DPI
// synapse circuits by the word's 2-bit synapse type (0 fast excitatory,
// 1 slow excitatory, 2 subtractive inhibitory, 3 shunting inhibitory). The
// CAM array presents one word per neuron per cycle, so at most one of the
// four outputs pulses in a cycle. Purely combinational.
module syn_decoder (
  input  logic       match,
  input  logic [1:0] syn_type,
  output logic [3:0] pulse
);
  always_comb begin
    pulse = '0;
    if (match) pulse[syn_type] = 1'b1;
  end
endmodule
