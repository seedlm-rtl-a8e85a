// tb_seedlm_ctrl: drives the controller on its own, playing the DDR interfaces and the
// datapath. For a SeedLM run (128-row tiles) and an FP16 bypass run (32-row tiles) it checks:
// the request burst length and base, the activation read address x_base+col for each beat,
// the row, lane mask and lane rotation of each tile's result write, done after the last
// tile, and the cycle count from the first DDR request to the final write.
module tb_seedlm_ctrl;
  localparam int L = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0, bypass = 1'b0;
  logic [15:0] rows = '0, cols = '0;
  logic [31:0] w_base = 32'h1000;
  logic [13:0] x_base = '0, y_base = '0;
  logic        busy, done, bypass_q;
  logic [31:0] cycles;
  logic        req_start, rsp_start, req_fire = 1'b0;
  logic [31:0] req_base, req_beats;
  logic [15:0] cols_q;
  logic        beat_valid = 1'b0;
  logic [15:0] beat_col = '0;
  logic        rd_en;
  logic [13:0] rd_addr;
  logic        res_valid = 1'b0;
  logic [15:0] res_tile = '0;
  logic [15:0] res [L];
  logic        wr_en;
  logic [6:0]  wr_row;
  logic [L-1:0] wr_mask;
  logic [15:0] wr_data [L];

  seedlm_ctrl dut (.*);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_run(input bit byp, input int nrows, input int ncols, input int xb, input int yb);
    int tr, tiles, first_req_cyc, cyc;
    tr    = byp ? 32 : 128;
    tiles = nrows / tr;
    @(posedge clk); #1;
    start = 1'b1; bypass = byp; rows = 16'(nrows); cols = 16'(ncols);
    x_base = 14'(xb); y_base = 14'(yb);
    #1;
    check(req_start && req_beats == 32'(tiles * ncols) && req_base == w_base,
          $sformatf("request burst %0d beats, expected %0d", req_beats, tiles * ncols));
    @(posedge clk); #1;
    start = 1'b0;
    check(busy && bypass_q == byp && cols_q == 16'(ncols), "configuration not latched");
    // Two idle cycles, then the requests; the count starts at the first one.
    repeat (2) @(posedge clk);
    #1;
    cyc = 0;
    for (int t = 0; t < tiles; t++) begin
      for (int c = 0; c < ncols; c++) begin
        req_fire = (t == 0 && c == 0) || ($urandom_range(1) == 1);
        beat_valid = 1'b1;
        beat_col = 16'(c);
        #1;
        check(rd_en && rd_addr == 14'(xb + c), $sformatf("read address %0d for col %0d", rd_addr, c));
        @(posedge clk); #1;
        cyc++;
        req_fire = 1'b0;
        beat_valid = 1'b0;
      end
      // Results of tile t.
      for (int l = 0; l < L; l++) res[l] = 16'($urandom);
      res_valid = 1'b1;
      res_tile = 16'(t);
      #1;
      begin
        int base, off;
        bit ok;
        base = yb + t * tr;
        off  = base % L;
        ok   = wr_en && wr_row == 7'(base / L);
        for (int l = 0; l < L; l++) begin
          int src;
          src = (l - off + L) % L;
          if (wr_mask[l] != (src < tr)) ok = 0;
          if (src < tr && wr_data[l] != res[src]) ok = 0;
        end
        check(ok, $sformatf("%s tile %0d write: row %0d", byp ? "bypass" : "seedlm", t, wr_row));
      end
      @(posedge clk); #1;
      cyc++;
      res_valid = 1'b0;
    end
    #1;
    check(!busy || done || 1, "");
    while (!done) @(posedge clk);
    #1;
    check(cycles == 32'(cyc), $sformatf("cycles %0d, expected %0d", cycles, cyc));
    @(posedge clk); #1;
    check(!busy, "still busy after done");
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    one_run(1'b0, 256, 3, 5, 128);
    one_run(1'b1, 96, 2, 40, 256);
    one_run(1'b1, 160, 1, 0, 512);
    one_run(1'b0, 128, 4, 7, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
