// ddr_resp_if: DDR read response interface.
//
// Registers each 64-byte read beat returned by the DDR controller and tags it with its
// place in the weight stream: the input column it belongs to, the output tile, and whether
// it is the first or last column of that tile. Beats arrive in the order they were
// requested, tile after tile, `cols` beats per tile (one per input column). The paper names
// this interface and gives its width (64 bytes per 200 MHz cycle); the tagging is this
// design's choice.
//
// Timing: outputs are valid the cycle after rsp_valid; there is no backpressure, a beat is
// accepted every cycle it arrives. `start` clears the column and tile counters.
module ddr_resp_if
  import seedlm_pkg::*;
#(
  parameter int unsigned BEAT_W = DDR_BITS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [15:0]       cols,
  input  logic              rsp_valid,
  input  logic [BEAT_W-1:0] rsp_data,
  output logic              beat_valid,
  output logic [BEAT_W-1:0] beat,
  output logic [15:0]       col,
  output logic [15:0]       tile,
  output logic              first,
  output logic              last_col
);

  logic [15:0] col_cnt, tile_cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      col_cnt    <= '0;
      tile_cnt   <= '0;
      beat_valid <= 1'b0;
    end else begin
      beat_valid <= rsp_valid;
      if (start) begin
        col_cnt  <= '0;
        tile_cnt <= '0;
      end else if (rsp_valid) begin
        if (col_cnt == cols - 1) begin
          col_cnt  <= '0;
          tile_cnt <= tile_cnt + 1'b1;
        end else begin
          col_cnt <= col_cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rsp_valid) begin
      beat     <= rsp_data;
      col      <= col_cnt;
      tile     <= tile_cnt;
      first    <= (col_cnt == 0);
      last_col <= (col_cnt == cols - 1);
    end
  end

endmodule
