// tb_lfsr_weight_decompress: checks one full 512-bit beat of 16 SeedLM records per cycle.
// For random beats every lane l must carry weight (l mod 8) of record l/8, scaled by that
// record's wshift, matching the real-valued reference to 2^-28, two cycles after the beat.
module tb_lfsr_weight_decompress;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid = 1'b0;
  logic [511:0]       beat = '0;
  logic               out_valid;
  logic signed [39:0] wfix [128];
  logic signed [7:0]  wshift [16];

  lfsr_weight_decompress dut (.clk, .rst_n, .in_valid, .beat, .out_valid, .wfix, .wshift);

  int checks = 0, failures = 0;
  logic [511:0] sent [$];
  int           sent_cyc [$];
  int           cyc = 0;
  int           nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [511:0] b;
      int           c;
      b = sent.pop_front();
      c = sent_cyc.pop_front();
      nout++;
      checks++;
      if (cyc - c != 2) begin
        failures++;
        $display("FAIL: latency %0d", cyc - c);
      end
      for (int l = 0; l < 128; l++) begin
        real got, ref_v, err;
        int  sh;
        sh    = int'(wshift[l / 8]);
        got   = real'(wfix[l]) * (2.0 ** sh);
        ref_v = seedlm_weight(b[32*(l/8) +: 32], l % 8);
        err   = got - ref_v;
        if (err < 0) err = -err;
        checks++;
        if (err > (ref_v < 0 ? -ref_v : ref_v) * (2.0 ** -28) + (2.0 ** -40)) begin
          failures++;
          if (failures < 20) $display("FAIL: lane %0d got %g ref %g", l, got, ref_v);
        end
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 200; n++) begin
      @(posedge clk); #1;
      for (int b = 0; b < 16; b++) begin
        int unsigned s, hi;
        s  = $urandom_range(65535, 1);
        hi = $urandom;
        beat[32*b +: 32] = {hi[15:0], 16'(s)};
      end
      in_valid = 1'b1;
      sent.push_back(beat);
      sent_cyc.push_back(cyc);
    end
    @(posedge clk); #1 in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != 200) begin
      failures++;
      $display("FAIL: %0d beats out", nout);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
