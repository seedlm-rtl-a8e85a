// tb_seedlm_full: the engine at its default size on the matrix sizes of the paper's FPGA
// cycle table (512x512, 1024x1024, 2048x2048), each with SeedLM-compressed weights and with
// FP16 weights (bypass). Every result element is checked against the reference, and each
// run's cycle count, from the first DDR read request to the final result write, must not
// exceed the count the paper reports for its FPGA build at the same size:
//   SeedLM 2341 / 8723 / 34331, FP16 8593 / 34201 / 136559.
// The DDR model answers every read after a fixed 20-cycle latency and never refuses one.
module tb_seedlm_full;
  localparam int unsigned DDR_BEATS = 131072 + 16;
  localparam int unsigned DDR_LAT   = 20;
  localparam int unsigned WATCHDOG  = 2000000;
  `include "tb_top_body.svh"

  int unsigned c_seed [3], c_fp16 [3];
  int sizes [3] = '{512, 1024, 2048};
  int paper_seed [3] = '{2341, 8723, 34331};
  int paper_fp16 [3] = '{8593, 34201, 136559};

  initial begin
    reset_dut();
    for (int s = 0; s < 3; s++) begin
      run(1'b0, sizes[s], sizes[s], paper_seed[s], 0);
      c_seed[s] = last_cycles;
      run(1'b1, sizes[s], sizes[s], paper_fp16[s], 0);
      c_fp16[s] = last_cycles;
      $display("%0dx%0d: speed-up of SeedLM over FP16 %0.2f (paper %0.2f)", sizes[s], sizes[s],
               real'(c_fp16[s]) / real'(c_seed[s]), real'(paper_fp16[s]) / real'(paper_seed[s]));
      // The compressed mode must approach the 4x of its four-fold weight rate.
      check(real'(c_fp16[s]) / real'(c_seed[s]) >= 3.6, "speed-up below 3.6");
    end
    finish_tb(1'b0);
  end
endmodule
