// tb_seedlm_block_decoder: checks the rebuilt weights of single SeedLM blocks.
// Random records (all exponents -8..7, all coefficient values) and the corner records
// (largest coefficients, extreme exponents) are decoded back to back, one per cycle. Each
// output weight wfix*2^wshift must match the real-valued reference
// 2^e sum_p q_p (V-32768)/32767 to a relative error of 2^-28 plus 2^-40 absolute (the reciprocal in the RTL is
// exact to 2^-30), and must appear exactly two cycles after its record.
module tb_seedlm_block_decoder;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid = 1'b0;
  logic [31:0]        rec = '0;
  logic               out_valid;
  logic signed [39:0] wfix [8];
  logic signed [7:0]  wshift;

  seedlm_block_decoder dut (.clk, .rst_n, .in_valid, .rec, .out_valid, .wfix, .wshift);

  int checks = 0, failures = 0;
  logic [31:0] sent [$];
  int          sent_cyc [$];
  int          cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output checker.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [31:0] r;
      int          c;
      r = sent.pop_front();
      c = sent_cyc.pop_front();
      checks++;
      if (cyc - c != 2) begin
        failures++;
        $display("FAIL: latency %0d", cyc - c);
      end
      for (int i = 0; i < 8; i++) begin
        real got, ref_v, err;
        int  sh;
        sh    = int'(wshift);
        got   = real'(wfix[i]) * (2.0 ** sh);
        ref_v = seedlm_weight(r, i);
        err   = got - ref_v;
        if (err < 0) err = -err;
        checks++;
        if (err > (ref_v < 0 ? -ref_v : ref_v) * (2.0 ** -28) + (2.0 ** -40)) begin
          failures++;
          if (failures < 20) $display("FAIL: rec %h w%0d got %g ref %g", r, i, got, ref_v);
        end
      end
    end
  end

  initial begin
    logic [31:0] corner [4] = '{32'h7778_FFFF, 32'h8887_0001, 32'h1230_8000, 32'hFFF7_7FFF};
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < 1004; n++) begin
      @(posedge clk); #1;
      if (n < 4) rec = corner[n];
      else begin
        int unsigned s, hi;
        s  = $urandom_range(65535, 1);
        hi = $urandom;
        rec = {hi[15:0], 16'(s)};
      end
      in_valid = (n % 7 != 3);   // a gap now and then
      if (in_valid) begin
        sent.push_back(rec);
        sent_cyc.push_back(cyc);
      end
    end
    @(posedge clk); #1 in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin
      failures++;
      $display("FAIL: %0d records never came out", sent.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
