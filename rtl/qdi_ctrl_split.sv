// qdi_ctrl_split: controlled split (CSP), and N-way split tree (SPT).
//
// The input token goes to exactly one output, the one whose index is given
// by 'sel'. 'sel' is a control value that travels with the token (in the
// asynchronous original it is a separate dual-rail control channel received
// together with the data). An out-of-range 'sel' is a protocol error.
// Combinational from input to outputs; the token is consumed when the
// selected output takes it.
//
// Channels are valid/ready; a transfer happens on a rising edge when valid
// and ready are both high.
module qdi_ctrl_split #(
  parameter int unsigned N = 2,
  parameter type T = logic [19:0],
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  T              in_data,
  input  logic [SW-1:0] sel,
  output logic [N-1:0]  out_valid,
  input  logic [N-1:0]  out_ready,
  output T              out_data
);
  always_comb begin
    out_valid = '0;
    out_valid[sel] = in_valid;
  end
  assign out_data = in_data;
  assign in_ready = out_ready[sel];

  a_sel: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> int'(sel) < N);
endmodule
