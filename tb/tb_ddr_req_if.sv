// tb_ddr_req_if: checks the DDR request generator against a random req_ready. For several
// bursts (lengths 1 to 300, random base addresses) the accepted requests must carry
// base, base+64, base+128, ... with no gap and no extra request; busy must fall right after
// the last one is taken; with req_ready always high one request is taken per cycle; a
// start while busy must be ignored.
module tb_ddr_req_if;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0, req_valid, req_ready = 1'b0, busy;
  logic [31:0] base_addr = '0, num_beats = '0, req_addr;

  ddr_req_if dut (.clk, .rst_n, .start, .base_addr, .num_beats, .req_valid, .req_ready, .req_addr, .busy);

  int checks = 0, failures = 0;
  int ready_pct = 50;
  int taken = 0;
  logic [31:0] expect_addr;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && req_valid && req_ready) begin
      checks++;
      if (req_addr != expect_addr) begin
        failures++;
        if (failures < 20) $display("FAIL: addr %h expected %h", req_addr, expect_addr);
      end
      expect_addr <= expect_addr + 64;
      taken <= taken + 1;
    end
  end

  always @(negedge clk) req_ready <= ($urandom_range(99) < ready_pct);

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int b = 0; b < 12; b++) begin
      int n, c0, c1;
      n = (b == 0) ? 1 : $urandom_range(300, 1);
      ready_pct = (b % 3 == 0) ? 100 : 50;
      @(posedge clk); #1;
      base_addr = {$urandom} & ~32'h3F;
      num_beats = n;
      expect_addr = base_addr;
      taken = 0;
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      c0 = 0;
      // A start in the middle of a burst must change nothing.
      if (n > 4) begin
        @(posedge clk); #1 start = 1'b1; base_addr = 32'h0; num_beats = 7;
        @(posedge clk); #1 start = 1'b0;
        c0 = 2;
      end
      c1 = c0;
      while (busy) begin @(posedge clk); #1; c1++; end
      checks++;
      if (taken != n) begin failures++; $display("FAIL: %0d requests, expected %0d", taken, n); end
      if (ready_pct == 100) begin
        checks++;
        if (c1 != n) begin failures++; $display("FAIL: %0d cycles for %0d requests at full rate", c1, n); end
      end
      repeat (3) @(posedge clk);
      checks++;
      if (taken != n) begin failures++; $display("FAIL: requests after busy fell"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
