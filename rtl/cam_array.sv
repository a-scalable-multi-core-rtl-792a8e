// cam_array: target memory of one core, searched by every event broadcast
// to the core.
//
// Each of the NEURONS neurons owns WORDS words; a word is a TAG_W-bit CAM
// entry (the tag of a source the synapse listens to) plus a 2-bit SRAM entry
// (the synapse type). An event is a tag. It is taken into the event buffer
// (EB) and put on the search lines; the validity check then raises PreB and
// the words are compared with the search lines. In silicon all words compare
// at once. Here the storage is one small memory per neuron, and the search
// visits one word index per cycle with all neurons in parallel, so that the
// 12-bit x WORDS x NEURONS storage is a memory and not a sea of registers.
// While PreB is high, in the cycle that visits word w,
//   match[n] = PreB & WENB & (word w of neuron n equals the search lines)
// gives one pulse, and match_type[n] is that word's synapse type. After the
// last word (the completion point, the role of the dummy word of the chip)
// Check rises; Check is the acknowledge to the event buffer, which returns
// the search lines to neutral; PreB falls and then Check falls, completing
// the four-phase cycle. A new event is taken only in the idle state. One
// broadcast takes WORDS + 3 cycles from acceptance to the next idle state.
//
// Writes (we) set one word's tag and type; WENB blocks the match pulses of
// the cycle in which a word is written. After reset a clearing sweep writes
// tag 0 and type 0 to every word, one word index per cycle (WORDS cycles);
// during the sweep no event and no write is accepted (ev_ready and
// we_ready low). Unprogrammed words therefore listen to tag 0.
module cam_array #(
  parameter int unsigned NEURONS = 256,
  parameter int unsigned WORDS   = 64,
  parameter int unsigned TAG_W   = 10,
  localparam int unsigned NAW = $clog2(NEURONS),
  localparam int unsigned WAW = $clog2(WORDS)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ev_valid,
  output logic               ev_ready,
  input  logic [TAG_W-1:0]   ev_data,
  input  logic               we,
  output logic               we_ready,
  input  logic [NAW-1:0]     w_neuron,
  input  logic [WAW-1:0]     w_word,
  input  logic [TAG_W-1:0]   w_tag,
  input  logic [1:0]         w_type,
  output logic [NEURONS-1:0] match,
  output logic [1:0]         match_type [NEURONS],
  output logic               preb,
  output logic               check
);
  typedef enum logic [2:0] {
    S_CLEAR,    // clearing sweep after reset
    S_NEUTRAL,  // search lines neutral, PreB low, match lines precharged
    S_VALID,    // EB drives the search lines; VC about to raise PreB
    S_SEARCH,   // PreB high, one word index compared per cycle
    S_CHECK,    // Check high: acknowledge to EB
    S_RELEASE   // EB neutral, PreB low; Check about to fall
  } state_e;

  state_e             state_q;
  logic [WAW-1:0]     row_q;    // word index visited (search) or cleared
  logic [TAG_W-1:0]   sl_q;     // search lines (EB output)
  logic               preb_q, check_q;
  logic               wenb;
  logic               clr;

  assign ev_ready   = (state_q == S_NEUTRAL);
  assign we_ready   = (state_q != S_CLEAR);
  assign preb       = preb_q;
  assign check      = check_q;
  assign wenb       = !we;
  assign clr        = (state_q == S_CLEAR);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state_q <= S_CLEAR;
      row_q   <= '0;
      sl_q    <= '0;
      preb_q  <= 1'b0;
      check_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_CLEAR: begin
          row_q <= row_q + 1'b1;
          if (int'(row_q) == WORDS - 1) state_q <= S_NEUTRAL;
        end
        S_NEUTRAL: if (ev_valid) begin
          sl_q    <= ev_data;
          state_q <= S_VALID;
        end
        S_VALID: begin
          preb_q  <= 1'b1;
          row_q   <= '0;
          state_q <= S_SEARCH;
        end
        S_SEARCH: begin
          row_q <= row_q + 1'b1;
          if (int'(row_q) == WORDS - 1) begin
            check_q <= 1'b1;
            state_q <= S_CHECK;
          end
        end
        S_CHECK: begin
          preb_q  <= 1'b0;
          state_q <= S_RELEASE;
        end
        S_RELEASE: begin
          check_q <= 1'b0;
          state_q <= S_NEUTRAL;
        end
        default: state_q <= S_NEUTRAL;
      endcase
    end
  end

  // One memory per neuron: {tag, type} for each of its words.
  for (genvar n = 0; n < int'(NEURONS); n++) begin : g_nrn
    logic [TAG_W+1:0] mem [WORDS];
    logic [TAG_W+1:0] rd;

    always_ff @(posedge clk) begin
      if (rst_n && clr)
        mem[row_q] <= '0;
      else if (rst_n && we && w_neuron == NAW'(n))
        mem[w_word] <= {w_tag, w_type};
    end

    assign rd            = mem[row_q];
    assign match[n]      = (state_q == S_SEARCH) && preb_q && wenb && (rd[TAG_W+1:2] == sl_q);
    assign match_type[n] = rd[1:0];
  end

  a_no_write_in_clear: assert property (@(posedge clk) disable iff (!rst_n) clr |-> !we);
endmodule
