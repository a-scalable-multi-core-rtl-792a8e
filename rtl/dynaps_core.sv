// dynaps_core: the digital part of one neural core.
//
// A core is ROWS x COLS computing nodes. Each node is one analog
// integrate-and-fire neuron with four DPI synapse circuits, fed by WORDS
// synapse words (10-bit CAM tag + 2-bit synapse type). The analog parts
// (neurons, DPI filters, pulse extenders) are outside this module: the
// neurons' spike handshakes come in as nrn_req/nrn_ack, and the pulses for
// the synapses go out as syn_pulse (per neuron, one bit per synapse type;
// a bit is high for one cycle for each word that matches an event).
//
// Inside: the CAM array receives the tags broadcast by the R1 router and
// searches the words of all neurons (one word index per cycle, all neurons
// in parallel); one syn_decoder per neuron steers each match pulse to the
// synapse type of the matching word; the address encoder turns neuron
// spikes into address-events for the R1 router.
//
// Programming: a 28-bit word with bit 27 clear writes one CAM word:
// [26:19] neuron, [18:13] word, [12:3] tag, [2:1] synapse type. Words with
// bit 27 set are for the R1 source memory and are ignored here. prg_ready is
// low while the CAM clears itself after reset (WORDS cycles), then high (one
// write per cycle). In a core built smaller than 16 x 16 x 64 the fields are
// read from their low bits.
module dynaps_core
  import dynaps_pkg::*;
#(
  parameter int unsigned ROWS  = 16,
  parameter int unsigned COLS  = 16,
  parameter int unsigned WORDS = 64,
  localparam int unsigned NN  = ROWS * COLS,
  localparam int unsigned NAW = $clog2(NN),
  localparam int unsigned WAW = $clog2(WORDS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ev_in_valid,
  output logic                  ev_in_ready,
  input  logic [TAG_W-1:0]      ev_in_data,
  output logic                  ev_out_valid,
  input  logic                  ev_out_ready,
  output logic [NAW-1:0]        ev_out_data,
  input  logic                  prg_valid,
  output logic                  prg_ready,
  input  logic [PRG_W-1:0]      prg_data,
  input  logic [NN-1:0]         nrn_req,
  output logic [NN-1:0]         nrn_ack,
  output logic [3:0]            syn_pulse [NN],
  output logic                  preb,
  output logic                  check
);
  logic [NN-1:0]  match;
  logic [1:0]     match_type [NN];
  logic           we;

  assign we = prg_valid && prg_ready && !prg_data[PRG_SEL_BIT];

  cam_array #(.NEURONS(NN), .WORDS(WORDS), .TAG_W(TAG_W)) u_cam (
    .clk, .rst_n,
    .ev_valid(ev_in_valid), .ev_ready(ev_in_ready), .ev_data(ev_in_data),
    .we, .we_ready(prg_ready),
    .w_neuron(prg_data[19 +: NAW]),
    .w_word(prg_data[13 +: WAW]),
    .w_tag(prg_data[12:3]),
    .w_type(prg_data[2:1]),
    .match, .match_type, .preb, .check);

  for (genvar n = 0; n < int'(NN); n++) begin : g_dec
    syn_decoder u_dec (.match(match[n]), .syn_type(match_type[n]), .pulse(syn_pulse[n]));
  end

  aer_encoder #(.ROWS(ROWS), .COLS(COLS)) u_enc (
    .clk, .rst_n,
    .nrn_req, .nrn_ack,
    .ev_valid(ev_out_valid), .ev_ready(ev_out_ready), .ev_data(ev_out_data));
endmodule
