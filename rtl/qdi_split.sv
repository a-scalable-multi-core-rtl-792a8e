// qdi_split: two-way copy (SP in the R1 diagram).
//
// Every input token is offered to both outputs at once. An output that has
// taken its copy is remembered in a 'taken' flag; the input token is
// consumed in the cycle in which the last copy is taken. The outputs may
// accept in different cycles. Combinational from input to outputs.
//
// Channels are valid/ready; a transfer happens on a rising edge when valid
// and ready are both high.
module qdi_split #(
  parameter type T = logic [19:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out0_valid,
  input  logic out0_ready,
  output T     out0_data,
  output logic out1_valid,
  input  logic out1_ready,
  output T     out1_data
);
  logic taken0_q, taken1_q;
  logic done0, done1;

  assign out0_valid = in_valid && !taken0_q;
  assign out1_valid = in_valid && !taken1_q;
  assign out0_data  = in_data;
  assign out1_data  = in_data;
  assign done0      = taken0_q || out0_ready;
  assign done1      = taken1_q || out1_ready;
  assign in_ready   = done0 && done1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      taken0_q <= 1'b0;
      taken1_q <= 1'b0;
    end else if (in_valid) begin
      if (in_ready) begin
        taken0_q <= 1'b0;
        taken1_q <= 1'b0;
      end else begin
        taken0_q <= done0;
        taken1_q <= done1;
      end
    end
  end
endmodule
