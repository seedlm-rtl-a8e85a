// Shared body of the end-to-end testbenches of seedlm_top.
//
// The including module defines DDR_BEATS (size of the DDR model), DDR_LAT (its read
// latency) and WATCHDOG (cycles before the run is abandoned), then calls run() from an
// initial block. run() writes a random FP16 input vector through the host port, fills the
// DDR model with a random weight matrix (SeedLM records or FP16 weights), starts the
// engine, waits for done, reads the result vector back and compares each element with a
// reference computed here in real arithmetic: each weight rebuilt from its record and
// rounded to FP16, products and sums in double precision, the sum rounded to FP16. A result
// passes if it equals the reference or is its FP16 neighbour (the reference sum and the
// engine's reciprocal both differ from exact arithmetic in far-down bits).

import tb_ref_pkg::*;

localparam int unsigned X_BASE = 0;
localparam int unsigned Y_BASE = 4096;
localparam int unsigned W_BASE = 64 * 16;   // byte address of the first weight beat

logic        clk = 1'b0;
logic        rst_n = 1'b0;
always #5 clk = ~clk;

logic        start = 1'b0, bypass = 1'b0;
logic [15:0] rows = '0, cols = '0;
logic        busy, done;
logic [31:0] cycles;
logic        ddr_req_valid, ddr_req_ready, ddr_rsp_valid;
logic [31:0] ddr_req_addr;
logic [511:0] ddr_rsp_data;
logic        host_rd_en = 1'b0, host_wr_en = 1'b0;
logic [13:0] host_rd_addr = '0, host_wr_addr = '0;
logic [15:0] host_rd_data, host_wr_data = '0;

seedlm_top dut (
  .clk, .rst_n, .start, .bypass, .rows, .cols,
  .w_base(32'(W_BASE)), .x_base(14'(X_BASE)), .y_base(14'(Y_BASE)),
  .busy, .done, .cycles,
  .ddr_req_valid, .ddr_req_ready, .ddr_req_addr, .ddr_rsp_valid, .ddr_rsp_data,
  .host_rd_en, .host_rd_addr, .host_rd_data, .host_wr_en, .host_wr_addr, .host_wr_data
);

ddr_model #(.BEAT_W(512), .BEATS(DDR_BEATS), .LATENCY(DDR_LAT)) u_ddr (
  .clk, .rst_n, .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req_addr(ddr_req_addr),
  .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data)
);

int checks = 0, failures = 0;
int n_seedlm = 0, n_bypass = 0, n_switch = 0, n_rotated = 0, n_single_col = 0, n_stalled = 0;
int n_exact = 0, n_ulp = 0;
bit last_mode_valid = 0, last_mode = 0;
int unsigned last_cycles;

initial begin
  repeat (WATCHDOG) @(posedge clk);
  failures++;
  $display("watchdog expired");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end

task automatic check(input bit ok, input string what);
  checks++;
  if (!ok) begin
    failures++;
    if (failures < 20) $display("FAIL: %s", what);
  end
endtask

task automatic host_write(input int addr, input logic [15:0] d);
  @(posedge clk); #1;
  host_wr_en = 1'b1; host_wr_addr = 14'(addr); host_wr_data = d;
  @(posedge clk); #1;
  host_wr_en = 1'b0;
endtask

task automatic host_read(input int addr, output logic [15:0] d);
  @(posedge clk); #1;
  host_rd_en = 1'b1; host_rd_addr = 14'(addr);
  @(posedge clk); #1;
  host_rd_en = 1'b0;
  d = host_rd_data;
endtask

function automatic logic [15:0] rand_fp16(int emin, int emax);
  logic [15:0] h;
  int unsigned r0, r1, r2;
  r0 = $urandom;
  r1 = $urandom_range(emax - emin);
  r2 = $urandom;
  h[15]    = r0[0];
  h[14:10] = 5'(15 + emin + int'(r1));
  h[9:0]   = r2[9:0];
  return h;
endfunction

// All 8 weights of a record, each rounded to FP16, as reals.
function automatic void block_weights(input logic [31:0] rec, output real w [8]);
  int unsigned st;
  int          q [3];
  real         sum;
  int          ev;
  logic [15:0] h;
  logic signed [3:0] e4;
  e4 = rec[19:16];
  ev = int'(e4);
  st = rec[15:0];
  for (int p = 0; p < 3; p++) begin
    logic signed [3:0] q4;
    q4   = rec[20 + 4*p +: 4];
    q[p] = int'(q4);
  end
  for (int i = 0; i < 8; i++) begin
    sum = 0.0;
    for (int p = 0; p < 3; p++) begin
      st  = lfsr_step(st, 16);
      sum = sum + real'(q[p]) * (real'(st) - 32768.0) / 32767.0;
    end
    h    = real_to_fp16(sum * (2.0 ** ev));
    w[i] = fp16_to_real(h);
  end
endfunction

// One matrix-vector product. paper_cycles > 0: the cycle count must not exceed it.
task automatic run(input bit byp, input int nrows, input int ncols, input int paper_cycles,
                   input int stall_pct);
  int  tr, tiles, beats;
  real acc [];
  logic [15:0] xv [];
  logic [511:0] bt;
  logic [31:0]  rec;
  real          w8 [8];
  logic [15:0]  got, exp;
  tr    = byp ? 32 : 128;
  tiles = nrows / tr;
  beats = tiles * ncols;
  acc   = new[nrows];
  xv    = new[ncols];
  foreach (acc[r]) acc[r] = 0.0;
  u_ddr.stall_pct = stall_pct;
  for (int j = 0; j < ncols; j++) begin
    xv[j] = rand_fp16(-6, 1);
    host_write(X_BASE + j, xv[j]);
  end
  for (int t = 0; t < tiles; t++) begin
    for (int j = 0; j < ncols; j++) begin
      real xr;
      xr = fp16_to_real(xv[j]);
      bt = '0;
      if (byp) begin
        for (int k = 0; k < 32; k++) begin
          logic [15:0] wv;
          wv = rand_fp16(-8, 0);
          bt[16*k +: 16] = wv;
          acc[t*32 + k] += fp16_to_real(wv) * xr;
        end
      end else begin
        for (int b = 0; b < 16; b++) begin
          int unsigned rs, re, rq;
          rs = $urandom_range(65535, 1);
          re = $urandom_range(10);
          rq = $urandom;
          rec[15:0]  = rs[15:0];
          rec[19:16] = 4'(int'(re) - 8);   // e in -8..2
          rec[31:20] = rq[11:0];
          bt[32*b +: 32] = rec;
          block_weights(rec, w8);
          for (int i = 0; i < 8; i++) acc[t*128 + 8*b + i] += w8[i] * xr;
        end
      end
      u_ddr.mem[W_BASE / 64 + t*ncols + j] = bt;
    end
  end
  @(posedge clk); #1;
  start = 1'b1; bypass = byp; rows = 16'(nrows); cols = 16'(ncols);
  @(posedge clk); #1;
  start = 1'b0;
  while (!done) @(posedge clk);
  #1;
  last_cycles = cycles;
  for (int r = 0; r < nrows; r++) begin
    host_read(Y_BASE + r, got);
    exp = real_to_fp16(acc[r]);
    if (got == exp) n_exact++;
    else if (fp16_close(got, exp)) n_ulp++;
    check(fp16_close(got, exp), $sformatf("%s %0dx%0d y[%0d] got %h expected %h",
          byp ? "fp16" : "seedlm", nrows, ncols, r, got, exp));
  end
  // A run takes at least one cycle per beat.
  check(cycles >= 32'(beats), $sformatf("cycles %0d below beat count %0d", cycles, beats));
  if (paper_cycles > 0)
    check(cycles <= 32'(paper_cycles), $sformatf("cycles %0d above %0d", cycles, paper_cycles));
  if (stall_pct == 0)
    check(cycles <= 32'(beats + DDR_LAT + 16), $sformatf("cycles %0d: not one beat per cycle (%0d beats)", cycles, beats));
  $display("%s %0dx%0d: %0d beats, %0d cycles", byp ? "FP16  " : "SeedLM", nrows, ncols, beats, cycles);
  if (byp) n_bypass++; else n_seedlm++;
  if (last_mode_valid && last_mode != byp) n_switch++;
  last_mode_valid = 1; last_mode = byp;
  if (byp && tiles > 1) n_rotated++;
  if (ncols == 1) n_single_col++;
  if (u_ddr.stalls > 0 && stall_pct > 0) n_stalled++;
endtask

task automatic reset_dut();
  rst_n = 1'b0;
  repeat (3) @(posedge clk);
  #1 rst_n = 1'b1;
endtask

task automatic finish_tb(input bit need_all);
  $display("mechanisms: seedlm runs %0d, fp16 bypass runs %0d, mode switches %0d, rotated tile writes %0d, single-column runs %0d, runs with DDR request stalls %0d",
           n_seedlm, n_bypass, n_switch, n_rotated, n_single_col, n_stalled);
  $display("results: %0d exact, %0d one ulp away", n_exact, n_ulp);
  check(n_seedlm > 0, "no SeedLM run");
  check(n_bypass > 0, "no bypass run");
  check(n_switch > 0, "no mode switch");
  if (need_all) begin
    check(n_rotated > 0, "no rotated tile write");
    check(n_single_col > 0, "no single-column run");
    check(n_stalled > 0, "no DDR request stall");
  end
  // Nearly all results must be exact; one-ulp differences are rare rounding-boundary cases.
  check(n_ulp * 100 <= n_exact + n_ulp, "too many one-ulp differences");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
endtask
