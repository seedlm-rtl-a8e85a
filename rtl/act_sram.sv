// act_sram: on-chip activation memory of FP16 words.
//
// It holds the input vector of a matrix-vector product, read one word per cycle and
// broadcast to the multipliers, and receives the output vector, written one tile of up to
// LANES results per cycle. The paper names this memory but gives neither its size nor its
// organisation; DEPTH = 16384 words (256 Kbit) and the row organisation below are this
// design's choices.
//
// How: DEPTH words are kept as DEPTH/LANES rows of LANES words. The read port addresses a
// single word; the write port addresses a row and writes the lanes selected by wr_mask.
//
// Timing: rd_data is valid the cycle after rd_en (registered read). A write takes effect at
// the clock edge. The array is not reset.
module act_sram
  import seedlm_pkg::*;
#(
  parameter int unsigned DEPTH = 16384,
  parameter int unsigned LANES = LANES_DEF,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned ROWS = DEPTH / LANES,
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  output logic [15:0]      rd_data,
  input  logic             wr_en,
  input  logic [RW-1:0]    wr_row,
  input  logic [LANES-1:0] wr_mask,
  input  logic [15:0]      wr_data [LANES]
);

  logic [15:0] mem [ROWS][LANES];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[32'(rd_addr) / LANES][32'(rd_addr) % LANES];
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int l = 0; l < LANES; l++) begin
        if (wr_mask[l]) mem[wr_row][l] <= wr_data[l];
      end
    end
  end

endmodule
