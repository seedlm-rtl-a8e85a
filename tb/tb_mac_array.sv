// tb_mac_array: checks the multiply-accumulate lanes (reduced to 8 lanes).
// Tiles of random length (1 to 40 columns) follow each other without gaps, sometimes with
// idle cycles inside a tile. Weights and activations are random FP16 numbers, subnormals and
// both signs included (every third tile has subnormal activations). When acc_valid rises, exactly two cycles after the tile's last
// column, every accumulator times 2^-48 must equal the exact dot product, computed in double
// precision with ranges chosen so that double arithmetic is exact.
module tb_mac_array;
  import tb_ref_pkg::*;

  localparam int L = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               in_valid = 1'b0, first = 1'b0, last = 1'b0;
  logic [15:0]        w [L];
  logic [15:0]        x = '0;
  logic               acc_valid;
  logic signed [95:0] acc [L];

  mac_array #(.LANES(L)) dut (.clk, .rst_n, .in_valid, .first, .last, .w, .x, .acc_valid, .acc);

  int checks = 0, failures = 0, tiles_done = 0;
  real exp_q [$];
  int  due_q [$];
  int  cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && acc_valid) begin
      real e [L];
      int  d;
      for (int l = 0; l < L; l++) e[l] = exp_q.pop_front();
      d = due_q.pop_front();
      tiles_done++;
      checks++;
      if (cyc != d) begin failures++; $display("FAIL: acc_valid at %0d, expected %0d", cyc, d); end
      for (int l = 0; l < L; l++) begin
        real got;
        got = real'(acc[l]) * (2.0 ** -48);
        checks++;
        if (got != e[l]) begin
          failures++;
          if (failures < 20) $display("FAIL: lane %0d got %g expected %g", l, got, e[l]);
        end
      end
    end
  end

  // Random FP16 with exponent field in [emin, emax]; field 0 gives a subnormal.
  function automatic logic [15:0] rnd(input int emin, input int emax);
    int unsigned r, e;
    r = $urandom;
    e = $urandom_range(emax, emin);
    return {r[15], 5'(e), r[9:0]};
  endfunction

  initial begin
    for (int l = 0; l < L; l++) w[l] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int  n;
      real s [L];
      n = (t % 10 == 0) ? 1 : $urandom_range(40, 1);
      for (int l = 0; l < L; l++) s[l] = 0.0;
      for (int j = 0; j < n; j++) begin
        @(posedge clk); #1;
        // Every third tile multiplies subnormal activations by small weights.
        x = (t % 3 == 0) ? rnd(0, 0) : rnd(10, 20);
        for (int l = 0; l < L; l++) begin
          w[l] = (t % 3 == 0) ? rnd(10, 14) : rnd(10, 20);
          s[l] += fp16_to_real(w[l]) * fp16_to_real(x);
        end
        in_valid = 1'b1;
        first = (j == 0);
        last  = (j == n - 1);
        if (last) begin
          for (int l = 0; l < L; l++) exp_q.push_back(s[l]);
          due_q.push_back(cyc + 2);
        end
        if ($urandom_range(5) == 0 && !last) begin
          @(posedge clk); #1;
          in_valid = 1'b0;
          x = 16'h3C00;  // must be ignored
        end
      end
    end
    @(posedge clk); #1 in_valid = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (tiles_done != 300) begin failures++; $display("FAIL: %0d tiles finished", tiles_done); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
