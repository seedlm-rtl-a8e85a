// tb_fix2fp16: checks the fixed-point to FP16 converter against a real-arithmetic
// reference with round-to-nearest-even. Two instances: W=40 as used ahead of the
// multipliers, W=96 as used on the accumulators. Inputs: zero, exact ties, values that
// round up into the next binade, subnormal results, overflow to infinity, and random
// values over the whole scale range, fed back to back. Each result must equal the
// reference exactly and appear two cycles after its input.
module tb_fix2fp16;
  import tb_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               v = 1'b0;
  logic signed [39:0] xa = '0;
  logic signed [95:0] xb = '0;
  logic signed [7:0]  sh = '0;
  logic               va, vb;
  logic [15:0]        ya, yb;

  fix2fp16 #(.W(40)) dut_a (.clk, .rst_n, .in_valid(v), .x(xa), .shift(sh), .out_valid(va), .y(ya));
  fix2fp16 #(.W(96)) dut_b (.clk, .rst_n, .in_valid(v), .x(xb), .shift(sh), .out_valid(vb), .y(yb));

  int checks = 0, failures = 0;
  logic [15:0] exp_q [$];
  int          cyc_q [$];
  int          cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && va) begin
      logic [15:0] e;
      int c;
      e = exp_q.pop_front();
      c = cyc_q.pop_front();
      checks += 3;
      if (ya != e) begin failures++; if (failures < 20) $display("FAIL W=40: got %h expected %h", ya, e); end
      if (yb != e) begin failures++; if (failures < 20) $display("FAIL W=96: got %h expected %h", yb, e); end
      if (cyc - c != 2 || !vb) begin failures++; $display("FAIL: latency %0d", cyc - c); end
    end
  end

  task automatic send(input longint x, input int s);
    @(posedge clk); #1;
    v  = 1'b1;
    xa = 40'(x);
    xb = 96'(x);
    sh = 8'(s);
    exp_q.push_back(real_to_fp16(real'(x) * (2.0 ** s)));
    cyc_q.push_back(cyc);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    send(0, 0);
    send(1, 0);
    send(-1, 0);
    send(2049, 0);            // tie, rounds to even (2048)
    send(2051, 0);            // tie, rounds up (2052)
    send(4095, 0);            // rounds up into the next binade
    send(65504, 0);           // largest finite
    send(65520, 0);           // rounds to infinity
    send(-(1 << 20), 0);      // -infinity
    send(1, -24);             // smallest subnormal
    send(3, -26);             // subnormal tie
    send(1023, -24);          // largest subnormal
    send(2047, -25);          // rounds from subnormal up to the smallest normal
    send(1, -30);             // underflows to zero
    send(-12345, -38);
    send(longint'(1) << 38, -48);
    for (int n = 0; n < 20000; n++) begin
      longint x;
      int     s, bits;
      bits = $urandom_range(39, 1);
      x = longint'({$urandom, $urandom}) & ((longint'(1) << bits) - 1);
      if ($urandom_range(1)) x = -x;
      s = int'($urandom_range(70)) - 60;
      send(x, s);
    end
    @(posedge clk); #1 v = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
