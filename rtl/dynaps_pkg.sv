// dynaps_pkg: types and constants shared by the routers, the input interface
// and the cores of the multi-core neuromorphic processor.
//
// The routing packet is the 20-bit word stored in the R1 source memory: a
// 10-bit tag, a 4-bit destination-core field and a 6-bit relative chip offset
// (2-bit |dx|, 2-bit |dy|, one sign bit each). The field widths follow the
// design; the bit order inside the word is this implementation's choice.
// The destination-core field is used as a mask with one bit per core of the
// target chip. Programming-word layouts for the 34-bit host input are also
// this implementation's choice; only the widths (34, 28, 12, 23, 20) are
// given by the architecture.
package dynaps_pkg;

  localparam int unsigned TAG_W       = 10;  // source tag width
  localparam int unsigned N_CORES     = 4;   // cores per chip
  localparam int unsigned CORE_MASK_W = 4;   // destination-core field
  localparam int unsigned CORE_NEURONS = 256; // neurons per core
  localparam int unsigned NEURON_AW   = 8;   // log2(CORE_NEURONS)
  localparam int unsigned CAM_WORDS   = 64;  // CAM words (synapses) per neuron
  localparam int unsigned SRAM_FANOUT = 4;   // SRAM words read per neuron event
  localparam int unsigned FANOUT_W    = 2;   // header appended by R1
  localparam int unsigned PKT_W       = 20;  // routing packet width
  localparam int unsigned FPGA_W      = 34;  // host input word
  localparam int unsigned CHIPID_W    = 3;   // chip id field of the host word
  localparam int unsigned PRG_W       = 28;  // per-core memory programming word
  localparam int unsigned CONF_W      = 12;  // per-core configuration word
  localparam int unsigned BIAS_W      = 23;  // bias generator word
  localparam int unsigned SYN_TYPES   = 4;   // DPI synapses per neuron

  // 20-bit routing packet (bit 19 .. bit 0).
  typedef struct packed {
    logic                   sy;        // 1: north, 0: south
    logic                   sx;        // 1: east,  0: west
    logic [1:0]             dy;        // remaining hops in y
    logic [1:0]             dx;        // remaining hops in x
    logic [CORE_MASK_W-1:0] core_mask; // destination cores on the target chip
    logic [TAG_W-1:0]       tag;       // source tag matched by the CAMs
  } route_pkt_t;

  // Token circulating in the R1 memory address loop.
  typedef struct packed {
    logic [NEURON_AW-1:0] neuron;
    logic [FANOUT_W-1:0]  hdr;     // remaining SRAM words to read after this one
  } r1_token_t;

  // Synapse behaviour selected by the 2-bit synapse SRAM of each CAM word.
  typedef enum logic [1:0] {
    SYN_FAST_EXC   = 2'd0,  // FEPSP
    SYN_SLOW_EXC   = 2'd1,  // SEPSP
    SYN_SUB_INH    = 2'd2,  // FIPSP (subtractive)
    SYN_SHUNT_INH  = 2'd3   // SIPSP (shunting)
  } syn_type_e;

  // Per-core programming word (28 bits).
  //   [27]=0 CAM write : [26:19] neuron, [18:13] word, [12:3] tag, [2:1] type
  //   [27]=1 SRAM write: [26:19] neuron, [18:17] slot, [16] upper half, [9:0] data
  localparam int unsigned PRG_SEL_BIT = 27;

  function automatic logic chip_offset_zero(route_pkt_t p);
    return (p.dx == 2'd0) && (p.dy == 2'd0);
  endfunction

endpackage
