// mac_lane: one FP16 multiply-accumulate lane with an exact fixed-point accumulator.
//
// Each cycle with in_valid the lane multiplies an FP16 weight by an FP16 activation and adds
// the product to its accumulator, or loads the product into it when `first` is set (start of
// a new dot product). The accumulator is a signed ACC_W-bit integer whose LSB weighs 2^-48,
// the weight of the smallest product of two FP16 subnormals, so every product of finite FP16
// numbers is added without rounding; rounding happens once, when the sum is converted back
// to FP16. The paper asks for FP16 data and a DSP multiplier per lane; the exact wide
// accumulator is this design's choice. Infinities and NaNs are not treated specially.
//
// How: stage 1 multiplies the 11-bit significands (hidden bit included) and shifts the
// 22-bit product left by (exponent_a + exponent_b - 2), subnormals counting as exponent 1,
// then applies the sign. Stage 2 accumulates.
//
// Timing: the product is registered one cycle after in_valid, the accumulator updated the
// cycle after that. Control (first/last) is kept by the enclosing mac_array.
module mac_lane
  import seedlm_pkg::*;
#(
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 in_valid,   // stage-0 qualifier for the multiplier
  input  logic [15:0]          w,
  input  logic [15:0]          x,
  input  logic                 acc_en,     // stage-1 valid: update the accumulator
  input  logic                 acc_load,   // stage-1 first: load instead of add
  output logic signed [AW-1:0] acc
);

  logic signed [AW-1:0] prod_d, prod1;

  always_comb begin
    logic [10:0] ma, mb;
    logic [4:0]  ea, eb;
    logic [21:0] pm;
    logic [AW-1:0] mag;
    ea = (w[14:10] == 5'd0) ? 5'd1 : w[14:10];
    eb = (x[14:10] == 5'd0) ? 5'd1 : x[14:10];
    ma = {(w[14:10] != 5'd0), w[9:0]};
    mb = {(x[14:10] != 5'd0), x[9:0]};
    pm = ma * mb;
    mag = AW'(pm) << (6'(ea) + 6'(eb) - 6'd2);
    prod_d = (w[15] ^ x[15]) ? -signed'(mag) : signed'(mag);
  end

  always_ff @(posedge clk) begin
    if (in_valid) prod1 <= prod_d;
  end

  always_ff @(posedge clk) begin
    if (acc_en) acc <= acc_load ? prod1 : acc + prod1;
  end

endmodule
