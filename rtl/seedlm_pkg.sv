// seedlm_pkg: constants, types and functions shared by the SeedLM matrix-vector engine.
//
// A SeedLM weight block of C weights is stored as a K-bit LFSR seed s, a shared 4-bit
// two's-complement exponent e and P 4-bit two's-complement coefficients q_p. The block is
// rebuilt as w = U(s) t with t_p = q_p * 2^e and U(s) = (V(s) - 2^(K-1)) / (2^(K-1) - 1),
// where V(s) holds, row-major, the C*P LFSR states that follow the seed.
//
// The default configuration (K=16, C=8, P=3, so 4 bits per weight), the LFSR tap table and the
// shift direction follow the paper. The bit layout of a block record (seed in the low bits,
// then the exponent, then q_0..q_{P-1}) is this design's own choice.
package seedlm_pkg;

  // Compression configuration (4 bits per weight).
  localparam int unsigned K_DEF = 16;  // LFSR length
  localparam int unsigned C_DEF = 8;   // weights per block
  localparam int unsigned P_DEF = 3;   // coefficients per block

  // Datapath sizes of the FPGA engine.
  localparam int unsigned LANES_DEF     = 128;  // multiply-accumulate lanes
  localparam int unsigned DDR_BITS      = 512;  // one 64-byte DDR read beat
  localparam int unsigned FP16_PER_BEAT = DDR_BITS / 16;  // uncompressed weights per beat

  // Fixed-point weight word leaving the block decoder.
  localparam int unsigned WFIX_W = 40;
  // Accumulator word of a MAC lane and the binary scale of its LSB.
  localparam int unsigned ACC_W   = 96;
  localparam int          ACC_LSB = -48;

  // Bits of one stored block: seed, exponent, coefficients.
  function automatic int unsigned block_bits(int unsigned k, int unsigned p);
    return k + 4 + 4 * p;
  endfunction

  // Feedback taps of a maximal-length LFSR of length k: bit j of the mask set means
  // state bit j (bit 0 is the oldest bit) enters the XOR that forms the new bit.
  function automatic logic [31:0] lfsr_taps(int unsigned k);
    case (k)
      2:  return 32'h3;                       // (0,1)
      3:  return 32'h3;                       // (0,1)
      4:  return 32'h3;                       // (0,1)
      5:  return 32'h5;                       // (0,2)
      6:  return 32'h3;                       // (0,1)
      7:  return 32'h3;                       // (0,1)
      8:  return 32'h1D;                      // (0,2,3,4)
      9:  return 32'h11;                      // (0,4)
      10: return 32'h9;                       // (0,3)
      11: return 32'h5;                       // (0,2)
      12: return 32'h107;                     // (0,1,2,8)
      13: return 32'h27;                      // (0,1,2,5)
      14: return 32'h1007;                    // (0,1,2,12)
      15: return 32'h3;                       // (0,1)
      16: return 32'h100B;                    // (0,1,3,12)
      17: return 32'h9;                       // (0,3)
      18: return 32'h81;                      // (0,7)
      19: return 32'h27;                      // (0,1,2,5)
      20: return 32'h9;                       // (0,3)
      21: return 32'h5;                       // (0,2)
      22: return 32'h3;                       // (0,1)
      23: return 32'h21;                      // (0,5)
      24: return 32'h87;                      // (0,1,2,7)
      default: return 32'h0;
    endcase
  endfunction

  // One LFSR step: every bit moves one place towards bit 0 and the new bit, the XOR of the
  // tapped bits, enters at bit k-1.
  function automatic logic [31:0] lfsr_next(logic [31:0] state, int unsigned k);
    logic [31:0] taps;
    logic        fb;
    logic [31:0] nxt;
    taps = lfsr_taps(k);
    fb   = ^(state & taps);
    nxt  = state >> 1;
    nxt[k-1] = fb;
    return nxt;
  endfunction

endpackage
