// mac_array: LANES FP16 multiply-accumulate lanes sharing one activation.
//
// Each lane owns one element of the output vector: every cycle with in_valid it multiplies
// its own weight w[l] by the activation x broadcast to all lanes and accumulates, so LANES
// outputs of a matrix-vector product are computed at once, one input column per cycle. The
// paper's engine has 128 such lanes; the broadcast organisation is how this design reads
// "calculating 128 elements of the activation vector simultaneously".
//
// `first` marks the first column of a tile (accumulators restart), `last` the last one. Two
// cycles after a beat with `last`, acc_valid is high for one cycle and acc[] holds the
// finished fixed-point sums (LSB = 2^-48); the next tile's first beat may follow `last`
// immediately, so acc[] must be taken in that cycle.
module mac_array
  import seedlm_pkg::*;
#(
  parameter int unsigned LANES = LANES_DEF,
  parameter int unsigned AW    = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic                 first,
  input  logic                 last,
  input  logic [15:0]          w [LANES],
  input  logic [15:0]          x,
  output logic                 acc_valid,
  output logic signed [AW-1:0] acc [LANES]
);

  logic v1, f1, l1;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1        <= 1'b0;
      acc_valid <= 1'b0;
    end else begin
      v1        <= in_valid;
      acc_valid <= v1 && l1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      f1 <= first;
      l1 <= last;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    mac_lane #(.AW(AW)) u_lane (
      .clk     (clk),
      .in_valid(in_valid),
      .w       (w[l]),
      .x       (x),
      .acc_en  (v1),
      .acc_load(f1),
      .acc     (acc[l])
    );
  end

endmodule
