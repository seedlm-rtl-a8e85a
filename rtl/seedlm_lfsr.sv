// seedlm_lfsr: one-cycle generator of the LFSR states that follow a seed.
//
// Given a non-zero K-bit seed s, the outputs are the STEPS states the LFSR passes through
// after s: states[0] is the first state generated after the seed, states[STEPS-1] the last.
// Read row-major as a C x P matrix (STEPS = C*P) they form the integer matrix V(s) from
// which a SeedLM weight block is rebuilt; the seed itself is not part of the matrix.
//
// How: STEPS copies of the one-step next-state function (a shift plus an XOR of the tapped
// bits) are chained combinationally, so a whole block's matrix is available every cycle.
// The tap table and the shift direction are the paper's; computing the chain in logic rather
// than reading the states from a stored table is this design's choice.
//
// Interface: purely combinational, seed in, STEPS*K bits out. K must be 2..24.
// Most output bits are plain copies of seed bits (a shift register only moves them), so only
// the new feedback bits cost logic; a netlist shows the rest as wired to the input.
module seedlm_lfsr
  import seedlm_pkg::*;
#(
  parameter int unsigned K     = K_DEF,
  parameter int unsigned STEPS = C_DEF * P_DEF
) (
  input  logic [K-1:0]       seed,
  output logic [STEPS*K-1:0] states
);

  logic [31:0] chain [STEPS+1];

  always_comb begin
    chain[0] = 32'(seed);
    for (int i = 0; i < STEPS; i++) begin
      chain[i+1] = lfsr_next(chain[i], K);
    end
    for (int i = 0; i < STEPS; i++) begin
      states[i*K +: K] = chain[i+1][K-1:0];
    end
  end

endmodule
