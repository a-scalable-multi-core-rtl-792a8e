// aer_encoder: the neurons' handshake blocks (HS) and the core's address
// encoder.
//
// Each neuron raises nrn_req when it spikes and holds it until nrn_ack. The
// HS of that neuron records the spike as pending; an arbiter picks one
// pending neuron, first a row (y) and then a column (x) within that row,
// both round-robin, and loads its address {row, col} into the output
// register. The neuron is then acknowledged; it drops nrn_req, and nrn_ack
// falls one cycle later (four-phase). The output register holds one event
// and accepts the next only when empty. The arbitration order and the
// four-phase neuron handshake are this design's choices.
module aer_encoder #(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 16,
  localparam int unsigned NEURONS = ROWS * COLS,
  localparam int unsigned RW  = $clog2(ROWS),
  localparam int unsigned CLW = $clog2(COLS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NEURONS-1:0]  nrn_req,
  output logic [NEURONS-1:0]  nrn_ack,
  output logic                ev_valid,
  input  logic                ev_ready,
  output logic [RW+CLW-1:0]   ev_data
);
  logic [NEURONS-1:0] pending_q, ack_q, served;
  logic [RW-1:0]      row_ptr_q, row_sel;
  logic [CLW-1:0]     col_ptr_q, col_sel;
  logic               row_found, col_found;
  logic [ROWS-1:0]    row_any;
  logic [COLS-1:0]    row_bits;
  logic               ev_valid_q;
  logic [RW+CLW-1:0]  ev_q;
  logic               load;

  assign nrn_ack  = ack_q;
  assign ev_valid = ev_valid_q;
  assign ev_data  = ev_q;

  always_comb begin
    for (int r = 0; r < int'(ROWS); r++) row_any[r] = |pending_q[r*COLS +: COLS];
  end

  // round-robin row pick
  always_comb begin
    logic [RW:0] idx;
    row_sel = '0;
    row_found = 1'b0;
    idx = '0;
    for (int unsigned k = 0; k < ROWS; k++) begin
      idx = {1'b0, row_ptr_q} + (RW+1)'(k);
      if (idx >= (RW+1)'(ROWS)) idx = idx - (RW+1)'(ROWS);
      if (!row_found && row_any[idx[RW-1:0]]) begin
        row_sel = idx[RW-1:0];
        row_found = 1'b1;
      end
    end
  end

  assign row_bits = pending_q[row_sel*COLS +: COLS];

  // round-robin column pick within the chosen row
  always_comb begin
    logic [CLW:0] idx;
    col_sel = '0;
    col_found = 1'b0;
    idx = '0;
    for (int unsigned k = 0; k < COLS; k++) begin
      idx = {1'b0, col_ptr_q} + (CLW+1)'(k);
      if (idx >= (CLW+1)'(COLS)) idx = idx - (CLW+1)'(COLS);
      if (!col_found && row_bits[idx[CLW-1:0]]) begin
        col_sel = idx[CLW-1:0];
        col_found = 1'b1;
      end
    end
  end

  assign load = !ev_valid_q && row_found && col_found;

  always_comb begin
    served = '0;
    if (load) served[{row_sel, col_sel}] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pending_q  <= '0;
      ack_q      <= '0;
      row_ptr_q  <= '0;
      col_ptr_q  <= '0;
      ev_valid_q <= 1'b0;
      ev_q       <= '0;
    end else begin
      pending_q <= (pending_q | (nrn_req & ~ack_q)) & ~served;
      ack_q     <= served | (ack_q & nrn_req);
      if (load) begin
        ev_valid_q <= 1'b1;
        ev_q       <= {row_sel, col_sel};
        row_ptr_q  <= (int'(row_sel) == ROWS - 1) ? '0 : row_sel + 1'b1;
        col_ptr_q  <= (int'(col_sel) == COLS - 1) ? '0 : col_sel + 1'b1;
      end else if (ev_valid_q && ev_ready) begin
        ev_valid_q <= 1'b0;
      end
    end
  end
endmodule
