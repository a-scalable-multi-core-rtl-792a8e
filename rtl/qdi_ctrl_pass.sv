// qdi_ctrl_pass: controlled pass (CPASS).
//
// CHP: *[[v(in)]; [sig.t -> out!in [] sig.f -> skip]; in consumed]. When
// 'sig' is true the input token is copied to the output and consumed when
// the output takes it; when 'sig' is false the token is consumed at once and
// nothing is sent. 'sig' travels with the token. Used in the R1 memory
// address loop (pass while the header is non-zero) and in the input
// interface (pass words addressed to this chip). Combinational.
//
// Channels are valid/ready; a transfer happens on a rising edge when valid
// and ready are both high.
module qdi_ctrl_pass #(
  parameter type T = logic [19:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  input  logic sig,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  assign out_valid = in_valid && sig;
  assign out_data  = in_data;
  assign in_ready  = sig ? out_ready : 1'b1;

  // A dropped token never shows on the output.
  a_drop: assert property (@(posedge clk) disable iff (!rst_n) !sig |-> !out_valid);
endmodule
