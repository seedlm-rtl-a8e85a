// seedlm_block_decoder: rebuilds one SeedLM weight block from its stored record.
//
// The record holds a K-bit seed s, a 4-bit two's-complement exponent e and P 4-bit
// two's-complement coefficients q_p. Weight i of the block is
//     w_i = 2^e * sum_p q_p * (V[i][p] - 2^(K-1)) / (2^(K-1) - 1)
// where V[i][p] is LFSR state number i*P+p+1 after the seed (seedlm_lfsr). This follows the
// paper's normalisation of V into U(s) and its t_p = q_p * 2^e coefficient format.
//
// How: cycle 1 registers the C*P LFSR states. Cycle 2 forms the exact integer sums
// n_i = sum_p q_p (V[i][p] - 2^(K-1)) and replaces the division by 2^(K-1)-1 with a
// multiplication by 2^(K-1)+1 and a scale of 2^-(2K-2); the relative error of that is
// 2^-(2K-2), 2^-30 at K=16, far below FP16 precision. That reciprocal trick is this
// design's choice; the paper does not say how the hardware divides.
//
// Interface: in_valid/rec in; two cycles later out_valid with C signed fixed-point words
// wfix[i] and one signed scale wshift: weight i = wfix[i] * 2^wshift. No stall.
module seedlm_block_decoder
  import seedlm_pkg::*;
#(
  parameter int unsigned K  = K_DEF,
  parameter int unsigned C  = C_DEF,
  parameter int unsigned P  = P_DEF,
  parameter int unsigned WW = WFIX_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic [block_bits(K, P)-1:0]   rec,
  output logic                          out_valid,
  output logic signed [WW-1:0]          wfix [C],
  output logic signed [7:0]             wshift
);

  localparam int unsigned STEPS = C * P;

  logic [STEPS*K-1:0] states;
  seedlm_lfsr #(.K(K), .STEPS(STEPS)) u_lfsr (.seed(rec[K-1:0]), .states(states));

  // Stage 1 registers.
  logic               v1;
  logic [STEPS*K-1:0] states1;
  logic signed [3:0]  e1;
  logic signed [3:0]  q1 [P];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1 <= 1'b0;
    end else begin
      v1 <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      states1 <= states;
      e1      <= rec[K +: 4];
      for (int p = 0; p < P; p++) q1[p] <= rec[K + 4 + 4*p +: 4];
    end
  end

  // Stage 2: integer sums and the reciprocal multiply.
  logic signed [WW-1:0] wfix_d [C];

  always_comb begin
    for (int i = 0; i < C; i++) begin
      logic signed [WW-1:0] n;
      n = '0;
      for (int p = 0; p < P; p++) begin
        logic signed [WW-1:0] centred;
        centred = WW'(signed'({1'b0, states1[(i*P+p)*K +: K]})) - WW'(signed'(1 << (K-1)));
        n = n + centred * WW'(q1[p]);
      end
      wfix_d[i] = (n <<< (K-1)) + n;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= v1;
    end
  end

  always_ff @(posedge clk) begin
    if (v1) begin
      wfix   <= wfix_d;
      wshift <= 8'(e1) - 8'(2 * (K - 1));
    end
  end

endmodule
