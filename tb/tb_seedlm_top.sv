// tb_seedlm_top: end-to-end test of the SeedLM matrix-vector engine at its default size.
//
// Small matrices, so every mechanism is exercised quickly: SeedLM-compressed runs with one
// and several tiles, a single-column run (first and last beat of a tile coincide), FP16
// bypass runs whose 32-row tiles are written to rotated SRAM lanes, switches between the two
// modes, and runs where the DDR controller refuses requests at random. Each mechanism is
// counted and a failure is recorded for one that never happened. With no stalls, the run
// must take at most one cycle per DDR beat plus the fixed pipeline and DDR latency.
module tb_seedlm_top;
  localparam int unsigned DDR_BEATS = 4096;
  localparam int unsigned DDR_LAT   = 20;
  localparam int unsigned WATCHDOG  = 200000;
  `include "tb_top_body.svh"

  initial begin
    reset_dut();
    run(1'b0, 256, 8, 0, 0);
    run(1'b1, 128, 5, 0, 0);
    run(1'b0, 128, 1, 0, 0);
    run(1'b0, 256, 16, 0, 30);
    run(1'b1, 64, 3, 0, 30);
    run(1'b0, 384, 40, 0, 0);
    finish_tb(1'b1);
  end
endmodule
