// tb_seedlm_lfsr: tests the LFSR state generator and the tap table behind it.
//  1. K=3: from seed 4 the eight states must be 2,5,6,7,3,1,4,2, the matrix V(4) of the
//     paper's K=3 example read row-major.
//  2. K=16, one step per call: starting from 1, the generator must pass through all 65535
//     non-zero states before returning to 1 (maximal length).
//  3. K=16, 24 steps: for random seeds every output state must equal the reference LFSR
//     stepped bit by bit from the tap list (0,1,3,12).
//  4. Every tap set of the package table, K=2..20, must give a period of 2^K-1.
module tb_seedlm_lfsr;
  import seedlm_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [2:0]      seed3;
  logic [8*3-1:0]  st3;
  logic [15:0]     seed16a, seed16b;
  logic [15:0]     st16a;
  logic [24*16-1:0] st16b;

  seedlm_lfsr #(.K(3),  .STEPS(8))  u_k3  (.seed(seed3),   .states(st3));
  seedlm_lfsr #(.K(16), .STEPS(1))  u_k16 (.seed(seed16a), .states(st16a));
  seedlm_lfsr #(.K(16), .STEPS(24)) u_blk (.seed(seed16b), .states(st16b));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned fig [8] = '{2, 5, 6, 7, 3, 1, 4, 2};
    bit seen [65536];
    int unsigned period;
    // 1. K=3 example
    seed3 = 3'd4;
    #1;
    for (int i = 0; i < 8; i++)
      check(st3[i*3 +: 3] == 3'(fig[i]), $sformatf("K=3 state %0d = %0d, expected %0d", i, st3[i*3 +: 3], fig[i]));
    // 2. K=16 full period through the module
    seed16a = 16'd1;
    period  = 0;
    do begin
      #1;
      check(!seen[st16a], $sformatf("state %h repeats early", st16a));
      seen[st16a] = 1'b1;
      seed16a = st16a;
      period++;
    end while (st16a != 16'd1 && period < 70000);
    check(period == 65535, $sformatf("K=16 period %0d", period));
    // 3. block of 24 states against the reference
    for (int n = 0; n < 500; n++) begin
      int unsigned s, r;
      s = $urandom_range(65535, 1);
      seed16b = 16'(s);
      #1;
      r = s;
      for (int i = 0; i < 24; i++) begin
        r = lfsr_step(r, 16);
        check(st16b[i*16 +: 16] == 16'(r), $sformatf("seed %h state %0d", s, i));
      end
    end
    // 4. tap table periods
    for (int k = 2; k <= 20; k++) begin
      logic [31:0] st;
      int unsigned per;
      st  = 32'd1;
      per = 0;
      do begin
        st = lfsr_next(st, k);
        per++;
      end while (st != 32'd1 && per <= (1 << k));
      check(per == (1 << k) - 1, $sformatf("K=%0d period %0d", k, per));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
