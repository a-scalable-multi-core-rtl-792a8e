// r2_router: chip-level tree router (level R2), one per chip.
//
// Upstream: packets from the four R1 routers are merged by a 4-input merge
// tree, then merged with packets from the input interface. A check on the
// chip offset (dx = 0 and dy = 0) drives a controlled split behind a buffer:
// local packets (1) go to the local split tree, the rest (0) to R3.
// Downstream: packets from R3 go to a second split tree. Each split tree
// delivers a packet to every core selected by its 4-bit destination-core
// mask, and four two-way merges (local tree, R3 tree) feed the R1 routers.
//
// All channels are valid/ready (transfer on a rising edge when both are
// high); they stand for the four-phase QDI channels of the chip.
module r2_router
  import dynaps_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic [3:0]   r1_in_valid,
  output logic [3:0]   r1_in_ready,
  input  route_pkt_t   r1_in_data [4],
  output logic [3:0]   r1_out_valid,
  input  logic [3:0]   r1_out_ready,
  output route_pkt_t   r1_out_data [4],
  input  logic         if_in_valid,
  output logic         if_in_ready,
  input  route_pkt_t   if_in_data,
  input  logic         r3_in_valid,
  output logic         r3_in_ready,
  input  route_pkt_t   r3_in_data,
  output logic         r3_out_valid,
  input  logic         r3_out_ready,
  output route_pkt_t   r3_out_data
);
  // ---- MGT over the four R1 inputs ----
  logic       mgt_valid, mgt_ready;
  route_pkt_t mgt_data;
  qdi_merge #(.N(4), .T(route_pkt_t)) u_mgt (
    .clk, .rst_n,
    .in_valid(r1_in_valid), .in_ready(r1_in_ready), .in_data(r1_in_data),
    .out_valid(mgt_valid), .out_ready(mgt_ready), .out_data(mgt_data));

  // ---- MG with the interface ----
  logic [1:0] mg_in_valid, mg_in_ready;
  route_pkt_t mg_in_data [2];
  logic       mg_valid, mg_ready;
  route_pkt_t mg_data;
  assign mg_in_valid   = {if_in_valid, mgt_valid};
  assign mg_in_data[0] = mgt_data;
  assign mg_in_data[1] = if_in_data;
  assign mgt_ready     = mg_in_ready[0];
  assign if_in_ready   = mg_in_ready[1];
  qdi_merge #(.N(2), .T(route_pkt_t)) u_mg (
    .clk, .rst_n,
    .in_valid(mg_in_valid), .in_ready(mg_in_ready), .in_data(mg_in_data),
    .out_valid(mg_valid), .out_ready(mg_ready), .out_data(mg_data));

  // ---- BUFs, CHK and CSP: 1 local, 0 to R3 ----
  logic       buf_valid, buf_ready;
  route_pkt_t buf_data;
  qdi_buffer #(.T(route_pkt_t)) u_buf (
    .clk, .rst_n,
    .in_valid(mg_valid), .in_ready(mg_ready), .in_data(mg_data),
    .out_valid(buf_valid), .out_ready(buf_ready), .out_data(buf_data));

  logic [1:0] csp_valid, csp_ready;
  route_pkt_t csp_data;
  qdi_ctrl_split #(.N(2), .T(route_pkt_t)) u_csp (
    .clk, .rst_n,
    .in_valid(buf_valid), .in_ready(buf_ready), .in_data(buf_data),
    .sel(chip_offset_zero(buf_data)),
    .out_valid(csp_valid), .out_ready(csp_ready), .out_data(csp_data));

  assign r3_out_valid = csp_valid[0];
  assign r3_out_data  = csp_data;

  // ---- SPT for local events and SPT for R3 events ----
  logic [3:0] loc_valid, loc_ready, rem_valid, rem_ready;
  route_pkt_t loc_data, rem_data;
  logic       loc_in_ready;
  assign csp_ready = {loc_in_ready, r3_out_ready};

  qdi_mask_split #(.N(4), .T(route_pkt_t)) u_spt_loc (
    .clk, .rst_n,
    .in_valid(csp_valid[1]), .in_ready(loc_in_ready), .in_data(csp_data),
    .mask(csp_data.core_mask),
    .out_valid(loc_valid), .out_ready(loc_ready), .out_data(loc_data));

  qdi_mask_split #(.N(4), .T(route_pkt_t)) u_spt_rem (
    .clk, .rst_n,
    .in_valid(r3_in_valid), .in_ready(r3_in_ready), .in_data(r3_in_data),
    .mask(r3_in_data.core_mask),
    .out_valid(rem_valid), .out_ready(rem_ready), .out_data(rem_data));

  // ---- MG0..MG3 ----
  for (genvar c = 0; c < 4; c++) begin : g_core
    logic [1:0] v, r;
    route_pkt_t d [2];
    assign v = {rem_valid[c], loc_valid[c]};
    assign d[0] = loc_data;
    assign d[1] = rem_data;
    assign loc_ready[c] = r[0];
    assign rem_ready[c] = r[1];
    qdi_merge #(.N(2), .T(route_pkt_t)) u_mg_core (
      .clk, .rst_n,
      .in_valid(v), .in_ready(r), .in_data(d),
      .out_valid(r1_out_valid[c]), .out_ready(r1_out_ready[c]), .out_data(r1_out_data[c]));
  end
endmodule
