// qdi_mask_split: multicast split tree (SPT of the R2 router).
//
// Delivers the input token to every output whose bit is set in 'mask' (one
// bit per local core). All selected outputs are offered the token at once;
// each output that has taken its copy is remembered, and the token is
// consumed when all selected outputs have taken it. A token with an empty
// mask is consumed without output. With one bit set this is a plain split
// tree; the mask reading of the 4-bit destination-core field is this
// design's choice.
//
// Channels are valid/ready; a transfer happens on a rising edge when valid
// and ready are both high.
module qdi_mask_split #(
  parameter int unsigned N = 4,
  parameter type T = logic [19:0]
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  T             in_data,
  input  logic [N-1:0] mask,
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output T             out_data
);
  logic [N-1:0] taken_q, done;

  assign out_valid = {N{in_valid}} & mask & ~taken_q;
  assign out_data  = in_data;
  assign done      = taken_q | out_ready | ~mask;
  assign in_ready  = &done;

  always_ff @(posedge clk) begin
    if (!rst_n) taken_q <= '0;
    else if (in_valid) taken_q <= in_ready ? '0 : (done & mask);
  end
endmodule
