// fix2fp16: pipelined fixed-point to IEEE 754 half-precision (FP16) converter.
//
// The input is a signed W-bit integer x and a signed binary scale `shift`; the value
// converted is x * 2^shift. The result is rounded to nearest, ties to even; values below the
// smallest normal number become FP16 subnormals (or zero), values too large become infinity
// of the right sign. Zero gives +0.
//
// The engine uses two banks of this converter: 128 of them turn decompressed weights into
// FP16 ahead of the multipliers (the paper's "PreMAC Fix2Float", 128 fully pipelined
// converters), and another LANES of them, with W=96, turn the finished accumulators into
// FP16 for the activation SRAM (the "FixedPoint To FP16" block of the paper's diagram).
// The rounding mode, subnormal handling and two-stage split are this design's choices.
//
// How: stage 1 takes the magnitude and finds its leading one. Stage 2 computes the
// unbiased exponent E = lead + shift, clamps it to the subnormal floor -14, shifts the
// magnitude so that its LSB weighs 2^(max(E,-14)-10), rounds, and packs the result as
// ((max(E,-14)+14) << 10) + rounded significand, which also handles the carry out of
// rounding and the subnormal to normal step.
//
// Interface: in_valid, x, shift in; out_valid and y two cycles later. No stall.
module fix2fp16 #(
  parameter int unsigned W = 40
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x,
  input  logic signed [7:0]   shift,
  output logic                out_valid,
  output logic [15:0]         y
);

  // Stage 1: sign, magnitude, leading-one position.
  logic             v1, s1, z1;
  logic [W-1:0]     mag1;
  logic signed [7:0] sh1;
  int unsigned      lead1;

  logic [W-1:0] mag_d;
  int unsigned  lead_d;

  always_comb begin
    mag_d  = x[W-1] ? W'(-x) : W'(x);
    lead_d = 0;
    for (int i = 0; i < W; i++) begin
      if (mag_d[i]) lead_d = i;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1    <= x[W-1];
      z1    <= (x == '0);
      mag1  <= mag_d;
      sh1   <= shift;
      lead1 <= lead_d;
    end
  end

  // Stage 2: exponent, alignment, rounding, packing.
  logic [15:0] y_d;

  always_comb begin
    int          e, ec, rsh;
    logic [W-1:0] r, rest, mask;
    logic        rbit, sticky;
    int unsigned bits;
    rest = '0;
    mask = '0;
    e  = int'(lead1) + int'(sh1);
    ec = (e < -14) ? -14 : e;
    rsh = ec - 10 - int'(sh1);
    if (rsh <= 0) begin
      r      = mag1 << (-rsh);
      rbit   = 1'b0;
      sticky = 1'b0;
    end else begin
      r      = mag1 >> rsh;
      rest   = mag1 >> (rsh - 1);
      rbit   = rest[0];
      mask   = ~({W{1'b1}} << (rsh - 1));
      sticky = |(mag1 & mask);
    end
    if (rbit && (sticky || r[0])) r = r + 1'b1;
    if (e > 15) bits = 32'h7C00;
    else        bits = (unsigned'(ec + 14) << 10) + 32'(r[11:0]);
    if (bits >= 32'h7C00) bits = 32'h7C00;
    if (z1) y_d = 16'h0000;
    else    y_d = {s1, bits[14:0]};
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
  end

  always_ff @(posedge clk) begin
    if (v1) y <= y_d;
  end

endmodule
