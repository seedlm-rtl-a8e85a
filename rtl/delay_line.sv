// delay_line: a chain of DEPTH registers that delays a W-bit signal by DEPTH cycles.
//
// Used by the engine to keep the activation and the beat tags in step with the weights as
// they pass through decompression and conversion. With rst_n low the stages clear to zero,
// so a delayed valid bit never starts out high. DEPTH must be at least 1.
module delay_line #(
  parameter int unsigned W     = 1,
  parameter int unsigned DEPTH = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);

  logic [W-1:0] stage [DEPTH];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) stage[i] <= '0;
    end else begin
      stage[0] <= d;
      for (int i = 1; i < DEPTH; i++) stage[i] <= stage[i-1];
    end
  end

  assign q = stage[DEPTH-1];

endmodule
