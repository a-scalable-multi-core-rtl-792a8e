// r1_router: the router paired with each core (level R1).
//
// Upstream: a neuron address from the core's encoder gets a 2-bit header
// appended (FANOUT-1, i.e. "read three more words after this one") and
// enters the memory address loop: merge -> buffer -> split. One copy of the
// token addresses the source SRAM at {neuron, header}; the other goes to a
// controlled pass that lets it through only while the header is non-zero,
// is decremented in a registered stage and merged back into the loop. A new
// event is admitted only when no loop token waits in the decrement stage
// and the loop buffer is empty, so the loop serves one event at a time and
// cannot deadlock. So each neuron event reads
// its FANOUT SRAM words, slots FANOUT-1 down to 0. Each word read is a
// routing packet; a controlled split sends it back to the own core (chip
// offset zero and core mask equal to this core only), to the R2 router
// (anything else), or drops it (empty entry: mask zero and no offset; the
// drop is this design's choice).
//
// Downstream: tags from the local path and from R2 are merged into the
// core's event input (core.out); only the 10-bit tag goes to the CAMs.
//
// Programming: a 28-bit word with bit 27 set writes one 10-bit half of an
// SRAM word: [26:19] neuron, [18:17] slot, [16] upper half, [9:0] data.
// prg_ready is low while the SRAM clears itself after reset.
//
// All channels are valid/ready (transfer on a rising edge when both are
// high); they stand for the four-phase QDI channels of the chip.
module r1_router
  import dynaps_pkg::*;
#(
  parameter int unsigned CORE_ID = 0,
  parameter int unsigned NEURONS = 256,
  parameter int unsigned FANOUT  = 4,
  localparam int unsigned NAW    = $clog2(NEURONS),
  localparam int unsigned HW     = $clog2(FANOUT)
) (
  input  logic             clk,
  input  logic             rst_n,
  // from the core's address encoder (corex.in)
  input  logic             core_in_valid,
  output logic             core_in_ready,
  input  logic [NAW-1:0]   core_in_data,
  // to the core's CAM array (core.out)
  output logic             core_out_valid,
  input  logic             core_out_ready,
  output logic [TAG_W-1:0] core_out_data,
  // to / from R2
  output logic             r2_out_valid,
  input  logic             r2_out_ready,
  output route_pkt_t       r2_out_data,
  input  logic             r2_in_valid,
  output logic             r2_in_ready,
  input  route_pkt_t       r2_in_data,
  // programming
  input  logic             prg_valid,
  output logic             prg_ready,
  input  logic [PRG_W-1:0] prg_data
);
  typedef struct packed {
    logic [NAW-1:0] neuron;
    logic [HW-1:0]  hdr;
  } token_t;

  // ---- Append ----
  token_t appended;
  assign appended = '{neuron: core_in_data, hdr: HW'(FANOUT - 1)};

  // ---- MG: new events (0) and loop tokens (1) ----
  logic [1:0] mg_in_valid, mg_in_ready;
  token_t     mg_in_data [2];
  logic       mg_valid, mg_ready;
  token_t     mg_data;
  token_t     dec_data;
  logic       cp_valid, cp_ready;
  token_t     cp_data;

  logic       dec_valid, dec_ready;
  token_t     dec_q;

  // A new event enters only while no loop token is waiting in the
  // decrement stage and the loop buffer is empty; otherwise the two ring
  // stages could both fill and block each other. Because the buffer is
  // empty, the merge never stalls on a new event, so its valid is never
  // withdrawn while granted.
  assign mg_in_valid   = {dec_valid, core_in_valid && !dec_valid && mg_ready};
  assign mg_in_data[0] = appended;
  assign mg_in_data[1] = dec_q;
  assign core_in_ready = mg_in_ready[0] && !dec_valid;
  assign dec_ready     = mg_in_ready[1];

  qdi_merge #(.N(2), .T(token_t)) u_mg (
    .clk, .rst_n,
    .in_valid(mg_in_valid), .in_ready(mg_in_ready), .in_data(mg_in_data),
    .out_valid(mg_valid), .out_ready(mg_ready), .out_data(mg_data));

  // ---- BUF ----
  logic   buf_valid, buf_ready;
  token_t buf_data;
  qdi_buffer #(.T(token_t)) u_buf (
    .clk, .rst_n,
    .in_valid(mg_valid), .in_ready(mg_ready), .in_data(mg_data),
    .out_valid(buf_valid), .out_ready(buf_ready), .out_data(buf_data));

  // ---- SP: to the loop (0) and to the SRAM (1) ----
  logic   sp0_valid, sp0_ready, sp1_valid, sp1_ready;
  token_t sp0_data, sp1_data;
  qdi_split #(.T(token_t)) u_sp (
    .clk, .rst_n,
    .in_valid(buf_valid), .in_ready(buf_ready), .in_data(buf_data),
    .out0_valid(sp0_valid), .out0_ready(sp0_ready), .out0_data(sp0_data),
    .out1_valid(sp1_valid), .out1_ready(sp1_ready), .out1_data(sp1_data));

  // ---- CPASS (header != 0) and Decrement ----
  qdi_ctrl_pass #(.T(token_t)) u_cpass (
    .clk, .rst_n,
    .in_valid(sp0_valid), .in_ready(sp0_ready), .in_data(sp0_data),
    .sig(sp0_data.hdr != '0),
    .out_valid(cp_valid), .out_ready(cp_ready), .out_data(cp_data));

  always_comb begin
    dec_data     = cp_data;
    dec_data.hdr = cp_data.hdr - 1'b1;
  end

  // The decrement is a pipeline stage of its own: the ring then has two
  // token places for its one circulating token.
  qdi_buffer #(.T(token_t)) u_dec (
    .clk, .rst_n,
    .in_valid(cp_valid), .in_ready(cp_ready), .in_data(dec_data),
    .out_valid(dec_valid), .out_ready(dec_ready), .out_data(dec_q));

  // ---- SRAM ----
  logic       q_valid, q_ready;
  route_pkt_t q_pkt;
  logic       wr_en;
  assign wr_en = prg_valid && prg_ready && prg_data[PRG_SEL_BIT];

  r1_sram #(.NEURONS(NEURONS), .FANOUT(FANOUT), .WORD_W(PKT_W)) u_sram (
    .clk, .rst_n,
    .rd_valid(sp1_valid), .rd_ready(sp1_ready), .rd_data({sp1_data.neuron, sp1_data.hdr}),
    .q_valid, .q_ready, .q_data(q_pkt),
    .wr_en, .wr_ready(prg_ready),
    .wr_addr({prg_data[19 +: NAW], prg_data[17 +: HW]}),
    .wr_hi(prg_data[16]),
    .wr_data(prg_data[PKT_W/2-1:0]));

  // ---- CSP: 0 -> R2.out, 1 -> own core, 2 -> drop (empty entry) ----
  logic [1:0] csp_sel;
  logic [2:0] csp_valid, csp_ready;
  route_pkt_t csp_data;
  localparam logic [CORE_MASK_W-1:0] OWN_MASK = CORE_MASK_W'(1) << CORE_ID;

  always_comb begin
    if (chip_offset_zero(q_pkt) && q_pkt.core_mask == OWN_MASK) csp_sel = 2'd1;
    else if (chip_offset_zero(q_pkt) && q_pkt.core_mask == '0)  csp_sel = 2'd2;
    else                                                         csp_sel = 2'd0;
  end

  qdi_ctrl_split #(.N(3), .T(route_pkt_t)) u_csp (
    .clk, .rst_n,
    .in_valid(q_valid), .in_ready(q_ready), .in_data(q_pkt), .sel(csp_sel),
    .out_valid(csp_valid), .out_ready(csp_ready), .out_data(csp_data));

  assign r2_out_valid = csp_valid[0];
  assign r2_out_data  = csp_data;

  // ---- MG: local events (0) and events from R2 (1) to core.out ----
  logic [1:0]       om_in_valid, om_in_ready;
  logic [TAG_W-1:0] om_in_data [2];
  assign om_in_valid   = {r2_in_valid, csp_valid[1]};
  assign om_in_data[0] = csp_data.tag;
  assign om_in_data[1] = r2_in_data.tag;
  assign csp_ready     = {1'b1, om_in_ready[0], r2_out_ready};
  assign r2_in_ready   = om_in_ready[1];

  qdi_merge #(.N(2), .T(logic [TAG_W-1:0])) u_mg_out (
    .clk, .rst_n,
    .in_valid(om_in_valid), .in_ready(om_in_ready), .in_data(om_in_data),
    .out_valid(core_out_valid), .out_ready(core_out_ready), .out_data(core_out_data));
endmodule
