// tb_ddr_resp_if: checks the response interface's tagging. Beats arrive with random gaps for
// runs of several tiles (cols from 1 to 9); each registered beat must equal the input, one
// cycle later, with col counting 0..cols-1 and wrapping, tile counting up at each wrap,
// first set on column 0 and last_col on column cols-1. start must reset the counters.
module tb_ddr_resp_if;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic         start = 1'b0, rsp_valid = 1'b0;
  logic [15:0]  cols = '0;
  logic [511:0] rsp_data = '0;
  logic         beat_valid, first, last_col;
  logic [511:0] beat;
  logic [15:0]  col, tile;

  ddr_resp_if dut (.clk, .rst_n, .start, .cols, .rsp_valid, .rsp_data, .beat_valid, .beat, .col, .tile, .first, .last_col);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int run = 0; run < 10; run++) begin
      int nc, nt;
      nc = (run == 0) ? 1 : $urandom_range(9, 1);
      nt = $urandom_range(5, 1);
      @(posedge clk); #1;
      cols = 16'(nc);
      start = 1'b1;
      @(posedge clk); #1;
      start = 1'b0;
      for (int t = 0; t < nt; t++) begin
        for (int c = 0; c < nc; c++) begin
          logic [511:0] d;
          while ($urandom_range(3) == 0) begin
            rsp_valid = 1'b0;
            @(posedge clk); #1;
            checks++;
            if (beat_valid) begin failures++; $display("FAIL: beat_valid without a beat"); end
          end
          for (int k = 0; k < 16; k++) d[32*k +: 32] = $urandom;
          rsp_valid = 1'b1;
          rsp_data  = d;
          @(posedge clk); #1;
          rsp_valid = 1'b0;
          checks++;
          if (!beat_valid || beat != d || col != 16'(c) || tile != 16'(t) ||
              first != (c == 0) || last_col != (c == nc - 1)) begin
            failures++;
            if (failures < 20) $display("FAIL: run %0d tile %0d col %0d: got col %0d tile %0d first %b last %b",
                                        run, t, c, col, tile, first, last_col);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
