// lfsr_weight_decompress: turns one DDR beat of SeedLM records into LANES weights.
//
// A 512-bit beat carries 16 records of 32 bits (K=16, P=3), each standing for C=8 weights,
// so one beat yields 128 weights per cycle, the rate the paper's 4-bit design reads weights
// at. Record b sits in bits [32b+31:32b] and feeds lanes C*b .. C*b+C-1; that placement is
// this design's choice.
//
// How: LANES/C seedlm_block_decoder instances side by side, all fed from the same beat.
//
// Interface: in_valid/beat in; two cycles later out_valid, wfix[lane] (signed fixed point)
// and wshift[block]: weight of lane l = wfix[l] * 2^wshift[l / C]. No stall.
module lfsr_weight_decompress
  import seedlm_pkg::*;
#(
  parameter int unsigned K        = K_DEF,
  parameter int unsigned C        = C_DEF,
  parameter int unsigned P        = P_DEF,
  parameter int unsigned LANES    = LANES_DEF,
  parameter int unsigned BEAT_W   = DDR_BITS,
  parameter int unsigned WW       = WFIX_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic [BEAT_W-1:0]    beat,
  output logic                 out_valid,
  output logic signed [WW-1:0] wfix   [LANES],
  output logic signed [7:0]    wshift [LANES/C]
);

  localparam int unsigned NBLK = LANES / C;
  localparam int unsigned RB   = block_bits(K, P);

  if (NBLK * RB > BEAT_W) begin : g_size_check
    $error("lfsr_weight_decompress: %0d records of %0d bits do not fit a %0d-bit beat", NBLK, RB, BEAT_W);
  end

  logic [NBLK-1:0] blk_valid;

  for (genvar b = 0; b < NBLK; b++) begin : g_blk
    logic signed [WW-1:0] bw [C];
    seedlm_block_decoder #(.K(K), .C(C), .P(P), .WW(WW)) u_dec (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .rec      (beat[b*RB +: RB]),
      .out_valid(blk_valid[b]),
      .wfix     (bw),
      .wshift   (wshift[b])
    );
    for (genvar i = 0; i < C; i++) begin : g_w
      assign wfix[b*C + i] = bw[i];
    end
  end

  assign out_valid = blk_valid[0];

endmodule
