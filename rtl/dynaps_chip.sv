// dynaps_chip: one multi-core neuromorphic processor chip (one tile).
//
// Four cores, each paired with an R1 router; one R2 router joining the four
// R1s and the input interface; one R3 router linking the chip to its four
// neighbours in a 2D mesh. A neuron spike becomes an address-event in its
// core, R1 reads the neuron's four routing words from its source memory and
// sends each one either straight back to its own core or up to R2; R2
// delivers packets with zero chip offset to the cores named in the packet's
// core mask and passes the rest to R3, which moves them hop by hop through
// the mesh; at the destination chip R3 hands them to R2, and R2 to the
// cores. Every core broadcasts each arriving tag to all its CAM words.
//
// The analog neurons, synapses, pulse extenders and bias generators are not
// part of this module: their digital connections are ports (nrn_req/nrn_ack,
// syn_pulse, bias_*). After reset the CAMs and source memories clear
// themselves (1024 cycles at full size) and hold back programming words
// until done. The per-core configuration latches are outside too
// (conf_*). Mesh ports are indexed 0 north, 1 south, 2 east, 3 west; a
// chip's east output connects to the west input of its east neighbour.
//
// All channels are valid/ready; a transfer happens on a rising clock edge
// when valid and ready are both high. Reset is synchronous, active low.
module dynaps_chip
  import dynaps_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned WORDS = 64,
  localparam int unsigned NN   = ROWS * COLS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [CHIPID_W-1:0] chip_id,
  // host input (FPGA.in)
  input  logic                fpga_in_valid,
  output logic                fpga_in_ready,
  input  logic [FPGA_W-1:0]   fpga_in_data,
  // mesh links: 0 north, 1 south, 2 east, 3 west
  input  logic [3:0]          mesh_in_valid,
  output logic [3:0]          mesh_in_ready,
  input  route_pkt_t          mesh_in_data  [4],
  output logic [3:0]          mesh_out_valid,
  input  logic [3:0]          mesh_out_ready,
  output route_pkt_t          mesh_out_data [4],
  // analog neurons and synapses
  input  logic [NN-1:0]       nrn_req [4],
  output logic [NN-1:0]       nrn_ack [4],
  output logic [3:0]          syn_pulse [4][NN],
  output logic [3:0]          cam_preb,     // per core: CAM search in progress
  output logic [3:0]          cam_check,    // per core: CAM search complete
  // bias generators ([1] BiasGen1, [0] BiasGen2) and core configuration latches
  output logic [1:0]          bias_valid,
  input  logic [1:0]          bias_ready,
  output logic [BIAS_W-1:0]   bias_data,
  output logic [3:0]          conf_valid,
  input  logic [3:0]          conf_ready,
  output logic [CONF_W-1:0]   conf_data
);
  localparam int unsigned NAW = $clog2(NN);

  // ---- input interface ----
  logic [3:0]       prg_valid, prg_ready;
  logic [PRG_W-1:0] prg_data;
  logic             if_r2_valid, if_r2_ready;
  route_pkt_t       if_r2_data;

  input_interface u_if (
    .clk, .rst_n, .chip_id,
    .fpga_in_valid, .fpga_in_ready, .fpga_in_data,
    .prg_valid, .prg_ready, .prg_data,
    .conf_valid, .conf_ready, .conf_data,
    .bias_valid, .bias_ready, .bias_data,
    .r2_out_valid(if_r2_valid), .r2_out_ready(if_r2_ready), .r2_out_data(if_r2_data));

  // ---- cores and R1 routers ----
  logic [3:0] up_valid, up_ready, dn_valid, dn_ready;
  route_pkt_t up_data [4];
  route_pkt_t dn_data [4];

  for (genvar c = 0; c < 4; c++) begin : g_core
    logic             enc_valid, enc_ready;
    logic [NAW-1:0]   enc_data;
    logic             bc_valid, bc_ready;
    logic [TAG_W-1:0] bc_data;
    logic             core_prg_ready, r1_prg_ready;

    // a programming word is taken when both the CAM and the SRAM are ready
    assign prg_ready[c] = core_prg_ready && r1_prg_ready;

    dynaps_core #(.ROWS(ROWS), .COLS(COLS), .WORDS(WORDS)) u_core (
      .clk, .rst_n,
      .ev_in_valid(bc_valid), .ev_in_ready(bc_ready), .ev_in_data(bc_data),
      .ev_out_valid(enc_valid), .ev_out_ready(enc_ready), .ev_out_data(enc_data),
      .prg_valid(prg_valid[c] && r1_prg_ready), .prg_ready(core_prg_ready), .prg_data,
      .nrn_req(nrn_req[c]), .nrn_ack(nrn_ack[c]),
      .syn_pulse(syn_pulse[c]),
      .preb(cam_preb[c]), .check(cam_check[c]));

    r1_router #(.CORE_ID(c), .NEURONS(NN), .FANOUT(SRAM_FANOUT)) u_r1 (
      .clk, .rst_n,
      .core_in_valid(enc_valid), .core_in_ready(enc_ready), .core_in_data(enc_data),
      .core_out_valid(bc_valid), .core_out_ready(bc_ready), .core_out_data(bc_data),
      .r2_out_valid(up_valid[c]), .r2_out_ready(up_ready[c]), .r2_out_data(up_data[c]),
      .r2_in_valid(dn_valid[c]), .r2_in_ready(dn_ready[c]), .r2_in_data(dn_data[c]),
      .prg_valid(prg_valid[c] && core_prg_ready), .prg_ready(r1_prg_ready), .prg_data);
  end

  // ---- R2 ----
  logic       r3u_valid, r3u_ready, r3d_valid, r3d_ready;
  route_pkt_t r3u_data, r3d_data;

  r2_router u_r2 (
    .clk, .rst_n,
    .r1_in_valid(up_valid), .r1_in_ready(up_ready), .r1_in_data(up_data),
    .r1_out_valid(dn_valid), .r1_out_ready(dn_ready), .r1_out_data(dn_data),
    .if_in_valid(if_r2_valid), .if_in_ready(if_r2_ready), .if_in_data(if_r2_data),
    .r3_in_valid(r3d_valid), .r3_in_ready(r3d_ready), .r3_in_data(r3d_data),
    .r3_out_valid(r3u_valid), .r3_out_ready(r3u_ready), .r3_out_data(r3u_data));

  // ---- R3: port 0 is R2, ports 1..4 are north, south, east, west ----
  logic [4:0] r3_in_valid, r3_in_ready, r3_out_valid, r3_out_ready;
  route_pkt_t r3_in_data  [5];
  route_pkt_t r3_out_data [5];

  assign r3_in_valid    = {mesh_in_valid, r3u_valid};
  assign r3u_ready      = r3_in_ready[0];
  assign mesh_in_ready  = r3_in_ready[4:1];
  assign r3d_valid      = r3_out_valid[0];
  assign r3d_data       = r3_out_data[0];
  assign mesh_out_valid = r3_out_valid[4:1];
  assign r3_out_ready   = {mesh_out_ready, r3d_ready};

  always_comb begin
    r3_in_data[0] = r3u_data;
    for (int p = 0; p < 4; p++) begin
      r3_in_data[p+1]  = mesh_in_data[p];
      mesh_out_data[p] = r3_out_data[p+1];
    end
  end

  r3_router u_r3 (
    .clk, .rst_n,
    .in_valid(r3_in_valid), .in_ready(r3_in_ready), .in_data(r3_in_data),
    .out_valid(r3_out_valid), .out_ready(r3_out_ready), .out_data(r3_out_data));
endmodule
