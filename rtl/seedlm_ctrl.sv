// seedlm_ctrl: sequencer of one matrix-vector product y = W x.
//
// The weight matrix (rows x cols) streams from DDR tile by tile. A tile is the group of
// output rows computed together: LANES rows when the weights are SeedLM-compressed (a beat
// carries 128 weights), 32 rows when compression is bypassed and the beat carries 32 FP16
// weights, which is the paper's reference mode using 32 of the 128 multipliers. Within a
// tile one beat holds one input column, so a tile takes `cols` beats and the whole product
// rows/tile_rows * cols beats. This beat order in DRAM is this design's choice.
//
// The controller
//  - on `start` latches the configuration, starts the DDR request interface for all beats
//    and clears the response counters;
//  - for each arriving beat reads x[x_base + col] from the activation SRAM;
//  - when a tile's results leave the output converters, writes them to
//    y[y_base + tile*tile_rows ...] in one SRAM row write (rotating them to their lanes);
//  - raises `done` for one cycle after the last tile is written, with `cycles` holding the
//    count from the first DDR read request to that final write, the interval the paper's
//    cycle table measures.
// Requirements: rows a multiple of the tile height, y_base a multiple of LANES, cols >= 1.
// req_base and req_beats are combinational from the start inputs: the DDR request interface
// samples them in the start cycle.
module seedlm_ctrl
  import seedlm_pkg::*;
#(
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned DEPTH  = 16384,
  parameter int unsigned ADDR_W = 32,
  localparam int unsigned SAW   = $clog2(DEPTH),
  localparam int unsigned ROWS  = DEPTH / LANES,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration and status
  input  logic              start,
  input  logic              bypass,
  input  logic [15:0]       rows,
  input  logic [15:0]       cols,
  input  logic [ADDR_W-1:0] w_base,
  input  logic [SAW-1:0]    x_base,
  input  logic [SAW-1:0]    y_base,
  output logic              busy,
  output logic              done,
  output logic [31:0]       cycles,
  output logic              bypass_q,   // latched mode, steers the weight path
  // DDR request interface
  output logic              req_start,
  output logic [ADDR_W-1:0] req_base,
  output logic [31:0]       req_beats,
  input  logic              req_fire,   // a request was taken this cycle
  // DDR response interface
  output logic              rsp_start,
  output logic [15:0]       cols_q,
  input  logic              beat_valid,
  input  logic [15:0]       beat_col,
  // activation reads
  output logic              rd_en,
  output logic [SAW-1:0]    rd_addr,
  // finished results from the output converters
  input  logic              res_valid,
  input  logic [15:0]       res_tile,
  input  logic [15:0]       res      [LANES],
  // activation writes
  output logic              wr_en,
  output logic [RW-1:0]     wr_row,
  output logic [LANES-1:0]  wr_mask,
  output logic [15:0]       wr_data  [LANES]
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  state_t state;

  logic [SAW-1:0] x_base_q, y_base_q;
  logic [15:0]    tiles_q, tiles_written;
  logic [15:0]    tile_rows;
  logic           counting;

  assign busy      = (state != S_IDLE);
  assign tile_rows = bypass_q ? 16'(FP16_PER_BEAT) : 16'(LANES);

  // Start of a run.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      bypass_q      <= 1'b0;
      cols_q        <= '0;
      tiles_q       <= '0;
      x_base_q      <= '0;
      y_base_q      <= '0;
      tiles_written <= '0;
      counting      <= 1'b0;
      cycles        <= '0;
      done          <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state         <= S_RUN;
          bypass_q      <= bypass;
          cols_q        <= cols;
          tiles_q       <= bypass ? 16'(rows / 16'(FP16_PER_BEAT)) : 16'(rows / 16'(LANES));
          x_base_q      <= x_base;
          y_base_q      <= y_base;
          tiles_written <= '0;
          counting      <= 1'b0;
          cycles        <= '0;
        end
        S_RUN: begin
          if (req_fire && !counting) counting <= 1'b1;
          if (counting || req_fire) cycles <= cycles + 1;
          if (wr_en) begin
            tiles_written <= tiles_written + 1'b1;
            if (tiles_written + 1'b1 == tiles_q) begin
              state    <= S_DONE;
              counting <= 1'b0;
            end
          end
        end
        default: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  assign req_start = (state == S_IDLE) && start;
  assign rsp_start = req_start;
  assign req_base  = w_base;
  assign req_beats = bypass ? 32'(rows / 16'(FP16_PER_BEAT)) * 32'(cols)
                            : 32'(rows / 16'(LANES)) * 32'(cols);

  // Activation read for every beat.
  assign rd_en   = beat_valid;
  assign rd_addr = x_base_q + SAW'(beat_col);

  // Result write: place the tile's results at y_base + tile*tile_rows.
  logic [SAW+15:0] wbase;
  logic [31:0]     off;

  always_comb begin
    wbase   = (SAW+16)'(y_base_q) + (SAW+16)'(res_tile) * (SAW+16)'(tile_rows);
    wr_row  = RW'(wbase / LANES);
    off     = 32'(wbase % LANES);
    wr_en   = res_valid && (state == S_RUN);
    for (int l = 0; l < LANES; l++) begin
      int unsigned src;
      src        = (32'(l) + LANES - off) % LANES;
      wr_data[l] = res[src];
      wr_mask[l] = (src < 32'(tile_rows));
    end
  end

  // Every beat is tied to a run.
  a_beat_in_run: assert property (@(posedge clk) disable iff (!rst_n) beat_valid |-> busy);

endmodule
