// qdi_buffer: one-place pipeline buffer (BUF in the router diagrams).
//
// Behaviour of the CHP process *[ IN?x ; OUT!x ]: receive one token, then
// send it, then receive the next. The buffer holds one token; it is ready to
// receive only when empty, so in_ready never depends on out_ready and every
// buffer cuts the combinational valid and ready paths of a channel chain
// (needed in the R1 memory address loop). Throughput is one token every two
// clock cycles.
//
// Channels are valid/ready: a token moves on a rising clock edge when valid
// and ready are both high. This replaces the four-phase dual-rail channels of
// the asynchronous original, which a single-clock design cannot express.
module qdi_buffer #(
  parameter type T = logic [19:0]
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data
);
  logic full_q;
  T     data_q;

  assign in_ready  = !full_q;
  assign out_valid = full_q;
  assign out_data  = data_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      full_q <= 1'b0;
      data_q <= '0;
    end else if (in_valid && in_ready) begin
      full_q <= 1'b1;
      data_q <= in_data;
    end else if (out_valid && out_ready) begin
      full_q <= 1'b0;
    end
  end

  // A stalled output keeps its token.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));
endmodule
