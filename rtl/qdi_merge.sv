// qdi_merge: arbitrated N-input merge (MG, and MGT merge trees, in the router
// diagrams).
//
// Each token that arrives on any input is passed to the single output, one
// at a time. When several inputs wait, a round-robin arbiter chooses; the
// choice is held while the output stalls, so the output data stays stable
// until it is taken. The asynchronous original uses a mutual-exclusion
// element (non-deterministic choice); round-robin is this design's fair
// clocked replacement. The path from inputs to output is combinational.
//
// Channels are valid/ready; a transfer happens on a rising edge when valid
// and ready are both high.
module qdi_merge #(
  parameter int unsigned N = 2,
  parameter type T = logic [19:0]
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  T             in_data [N],
  output logic         out_valid,
  input  logic         out_ready,
  output T             out_data
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] prio_q;   // input with highest priority next
  logic [IW-1:0] lock_idx_q;
  logic          lock_q;   // a granted token is stalled at the output
  logic [IW-1:0] grant;
  logic          any;

  always_comb begin
    logic [IW:0] idx;  // prio_q + k, before wrapping
    grant = '0;
    any   = 1'b0;
    idx   = '0;
    if (lock_q) begin
      grant = lock_idx_q;
      any   = 1'b1;
    end else begin
      for (int unsigned k = 0; k < N; k++) begin
        idx = {1'b0, prio_q} + (IW+1)'(k);
        if (idx >= (IW+1)'(N)) idx = idx - (IW+1)'(N);
        if (!any && in_valid[idx[IW-1:0]]) begin
          grant = idx[IW-1:0];
          any   = 1'b1;
        end
      end
    end
  end

  assign out_valid = any;
  assign out_data  = in_data[grant];

  always_comb begin
    in_ready = '0;
    if (any) in_ready[grant] = out_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prio_q     <= '0;
      lock_q     <= 1'b0;
      lock_idx_q <= '0;
    end else if (any) begin
      if (out_ready) begin
        lock_q <= 1'b0;
        prio_q <= (int'(grant) == N - 1) ? '0 : grant + 1'b1;
      end else begin
        lock_q     <= 1'b1;
        lock_idx_q <= grant;
      end
    end
  end

  // At most one input is acknowledged per cycle.
  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(in_ready & in_valid));
endmodule
