// input_interface: decoder for the 34-bit words sent to the chip by the host
// (an FPGA on the board).
//
// A controlled pass keeps only words whose chip-id field equals this chip's
// id. A chain of controlled splits then sorts the word:
//   [30] = 0           memory programming: split tree by core [29:28],
//                      28-bit word [27:0] to coreN.prg (CAM and R1 SRAM)
//   [30] = 1, [29] = 1 bias word [22:0]; [28] = 1 BiasGen1, 0 BiasGen2
//   [30] = 1, [29] = 0 [28] = 1: 20-bit event packet [19:0] to R2
//                      [28] = 0: 12-bit configuration [11:0] to the core
//                      selected by [27:26]
// [33:31] is the chip id. The split structure and the field widths follow
// the architecture; the bit positions of the selector fields are this
// design's choice.
//
// All channels are valid/ready (transfer on a rising edge when both are
// high). The host word is first latched in an input buffer (one word, no
// combinational path from the pins); from there to the outputs the path is
// combinational.
module input_interface
  import dynaps_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [CHIPID_W-1:0] chip_id,
  input  logic                fpga_in_valid,
  output logic                fpga_in_ready,
  input  logic [FPGA_W-1:0]   fpga_in_data,
  output logic [3:0]          prg_valid,
  input  logic [3:0]          prg_ready,
  output logic [PRG_W-1:0]    prg_data,
  output logic [3:0]          conf_valid,
  input  logic [3:0]          conf_ready,
  output logic [CONF_W-1:0]   conf_data,
  output logic [1:0]          bias_valid,   // [1] BiasGen1, [0] BiasGen2
  input  logic [1:0]          bias_ready,
  output logic [BIAS_W-1:0]   bias_data,
  output logic                r2_out_valid,
  input  logic                r2_out_ready,
  output route_pkt_t          r2_out_data
);
  typedef logic [FPGA_W-1:0] word_t;

  // ---- input buffer ----
  logic  ib_valid, ib_ready;
  word_t ib_data;
  qdi_buffer #(.T(word_t)) u_ibuf (
    .clk, .rst_n,
    .in_valid(fpga_in_valid), .in_ready(fpga_in_ready), .in_data(fpga_in_data),
    .out_valid(ib_valid), .out_ready(ib_ready), .out_data(ib_data));

  // ---- CPASS: this chip? ----
  logic  cp_valid, cp_ready;
  word_t cp_data;
  qdi_ctrl_pass #(.T(word_t)) u_cpass (
    .clk, .rst_n,
    .in_valid(ib_valid), .in_ready(ib_ready), .in_data(ib_data),
    .sig(ib_data[33:31] == chip_id),
    .out_valid(cp_valid), .out_ready(cp_ready), .out_data(cp_data));

  // ---- CSP on [30]: 0 programming, 1 other ----
  logic [1:0] c0_valid, c0_ready;
  word_t      c0_data;
  qdi_ctrl_split #(.N(2), .T(word_t)) u_csp_class (
    .clk, .rst_n,
    .in_valid(cp_valid), .in_ready(cp_ready), .in_data(cp_data), .sel(cp_data[30]),
    .out_valid(c0_valid), .out_ready(c0_ready), .out_data(c0_data));

  // ---- SPT core.prg ----
  word_t prg_word;
  qdi_ctrl_split #(.N(4), .T(word_t)) u_spt_prg (
    .clk, .rst_n,
    .in_valid(c0_valid[0]), .in_ready(c0_ready[0]), .in_data(c0_data), .sel(c0_data[29:28]),
    .out_valid(prg_valid), .out_ready(prg_ready), .out_data(prg_word));
  assign prg_data = prg_word[PRG_W-1:0];

  // ---- CSP on [29]: 1 bias, 0 network ----
  logic [1:0] c1_valid, c1_ready;
  word_t      c1_data;
  qdi_ctrl_split #(.N(2), .T(word_t)) u_csp_kind (
    .clk, .rst_n,
    .in_valid(c0_valid[1]), .in_ready(c0_ready[1]), .in_data(c0_data), .sel(c0_data[29]),
    .out_valid(c1_valid), .out_ready(c1_ready), .out_data(c1_data));

  // ---- CSP BiasGen on [28]: 1 BiasGen1, 0 BiasGen2 ----
  word_t bias_word;
  qdi_ctrl_split #(.N(2), .T(word_t)) u_csp_bias (
    .clk, .rst_n,
    .in_valid(c1_valid[1]), .in_ready(c1_ready[1]), .in_data(c1_data), .sel(c1_data[28]),
    .out_valid(bias_valid), .out_ready(bias_ready), .out_data(bias_word));
  assign bias_data = bias_word[BIAS_W-1:0];

  // ---- CSP network on [28]: 1 R2, 0 core conf ----
  logic [1:0] c2_valid, c2_ready;
  word_t      c2_data;
  qdi_ctrl_split #(.N(2), .T(word_t)) u_csp_net (
    .clk, .rst_n,
    .in_valid(c1_valid[0]), .in_ready(c1_ready[0]), .in_data(c1_data), .sel(c1_data[28]),
    .out_valid(c2_valid), .out_ready(c2_ready), .out_data(c2_data));

  assign r2_out_valid = c2_valid[1];
  assign r2_out_data  = route_pkt_t'(c2_data[PKT_W-1:0]);

  word_t conf_word;
  logic  conf_in_ready;
  assign c2_ready = {r2_out_ready, conf_in_ready};
  qdi_ctrl_split #(.N(4), .T(word_t)) u_spt_conf (
    .clk, .rst_n,
    .in_valid(c2_valid[0]), .in_ready(conf_in_ready), .in_data(c2_data), .sel(c2_data[27:26]),
    .out_valid(conf_valid), .out_ready(conf_ready), .out_data(conf_word));
  assign conf_data = conf_word[CONF_W-1:0];
endmodule
