// r1_sram: source memory of one core, read by the R1 memory address loop.
//
// 1024 words of 20 bits (20 Kb): NEURONS x FANOUT words, addressed by
// {neuron, slot}. Each word is a routing packet (tag, destination cores,
// chip offset). A read request is a valid/ready token carrying the address;
// the word appears one clock later in an output register and is held until
// taken. A new read is accepted only when the output register is empty, so
// there is at most one read in flight and no combinational ready path.
//
// Writes come from the per-core programming channel and write one 10-bit
// half of a word per cycle (lower half: tag; upper half: destination cores
// and chip offset), because a 28-bit programming word cannot carry a
// 10-bit address and a whole 20-bit word. Writes take effect at the clock
// edge. The storage is a plain memory without reset: after reset a clearing
// sweep writes zero (an empty entry) to one address per cycle, DEPTH cycles
// in all. During the sweep wr_ready and rd_ready are low; afterwards writes
// may happen in any cycle.
module r1_sram #(
  parameter int unsigned NEURONS = 256,
  parameter int unsigned FANOUT  = 4,
  parameter int unsigned WORD_W  = 20,
  localparam int unsigned DEPTH  = NEURONS * FANOUT,
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned HALF_W = WORD_W / 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_valid,
  output logic              rd_ready,
  input  logic [AW-1:0]     rd_data,
  output logic              q_valid,
  input  logic              q_ready,
  output logic [WORD_W-1:0] q_data,
  input  logic              wr_en,
  output logic              wr_ready,
  input  logic [AW-1:0]     wr_addr,
  input  logic              wr_hi,
  input  logic [HALF_W-1:0] wr_data
);
  logic [HALF_W-1:0] mem_lo [DEPTH];
  logic [HALF_W-1:0] mem_hi [DEPTH];
  logic              q_valid_q;
  logic [WORD_W-1:0] q_q;
  logic              clr_q;      // clearing sweep in progress
  logic [AW-1:0]     clr_addr_q;

  assign wr_ready = !clr_q;
  assign rd_ready = !clr_q && !q_valid_q;
  assign q_valid  = q_valid_q;
  assign q_data   = q_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      clr_q      <= 1'b1;
      clr_addr_q <= '0;
    end else if (clr_q) begin
      clr_addr_q <= clr_addr_q + 1'b1;
      if (int'(clr_addr_q) == DEPTH - 1) clr_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && clr_q) begin
      mem_lo[clr_addr_q] <= '0;
      mem_hi[clr_addr_q] <= '0;
    end else if (rst_n && wr_en) begin
      if (wr_hi) mem_hi[wr_addr] <= wr_data;
      else       mem_lo[wr_addr] <= wr_data;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      q_valid_q <= 1'b0;
      q_q       <= '0;
    end else if (rd_valid && rd_ready) begin
      q_valid_q <= 1'b1;
      q_q       <= {mem_hi[rd_data], mem_lo[rd_data]};
    end else if (q_valid_q && q_ready) begin
      q_valid_q <= 1'b0;
    end
  end
endmodule
