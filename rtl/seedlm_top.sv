// seedlm_top: SeedLM matrix-vector engine.
//
// Computes y = W x for an FP16 activation vector x held in on-chip SRAM and a weight
// matrix W streamed from DDR, either compressed with SeedLM (4 bits per weight: each block
// of C=8 weights stored as a 16-bit LFSR seed, a 4-bit exponent and three 4-bit
// coefficients) or, with `bypass`, as plain FP16. One 64-byte DDR beat per cycle carries
// 128 compressed weights or 32 FP16 weights, so the compressed mode does four times the
// multiply-accumulates per cycle of memory traffic.
//
// Data path (stage numbers are cycles after a beat leaves the response interface, R):
//   DDR request IF -> [DDR controller, outside] -> DDR response IF        (R)
//   activation SRAM read of x[col]                                        (R+1)
//   LFSR weight decompression, 16 block decoders                          (R+2)
//   128 pre-MAC fixed-point to FP16 converters                            (R+4)
//   (bypass: the beat's 32 FP16 weights, delayed 4 cycles, to lanes 0..31)
//   128 multiply-accumulate lanes, x broadcast                            (R+6 sums)
//   128 output fixed-point to FP16 converters                             (R+8)
//   one masked row write of the tile's results into the activation SRAM   (R+8)
// The block set and their order follow the paper's block diagram and text; the stage
// timing, the host port and the DRAM beat layout are this design's choices.
//
// Interface: the DDR controller (a vendor core, outside this design) sees a valid/ready
// read request port with byte addresses and a valid-only response port of DDR_BITS bits.
// While not busy, a host port reads and writes single words of the activation SRAM.
// A run starts with `start` (configuration sampled then) and ends with a one-cycle `done`;
// `cycles` then holds the cycles from the first DDR read request to the final SRAM write.
module seedlm_top
  import seedlm_pkg::*;
#(
  parameter int unsigned LANES  = LANES_DEF,
  parameter int unsigned K      = K_DEF,
  parameter int unsigned C      = C_DEF,
  parameter int unsigned P      = P_DEF,
  parameter int unsigned DEPTH  = 16384,
  parameter int unsigned ADDR_W = 32,
  localparam int unsigned SAW   = $clog2(DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // run control
  input  logic                start,
  input  logic                bypass,
  input  logic [15:0]         rows,
  input  logic [15:0]         cols,
  input  logic [ADDR_W-1:0]   w_base,
  input  logic [SAW-1:0]      x_base,
  input  logic [SAW-1:0]      y_base,
  output logic                busy,
  output logic                done,
  output logic [31:0]         cycles,
  // DDR controller read port
  output logic                ddr_req_valid,
  input  logic                ddr_req_ready,
  output logic [ADDR_W-1:0]   ddr_req_addr,
  input  logic                ddr_rsp_valid,
  input  logic [DDR_BITS-1:0] ddr_rsp_data,
  // host access to the activation SRAM while idle
  input  logic                host_rd_en,
  input  logic [SAW-1:0]      host_rd_addr,
  output logic [15:0]         host_rd_data,
  input  logic                host_wr_en,
  input  logic [SAW-1:0]      host_wr_addr,
  input  logic [15:0]         host_wr_data
);

  localparam int unsigned ROWS = DEPTH / LANES;
  localparam int unsigned RW   = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned NBLK = LANES / C;
  localparam int unsigned NBYP = (FP16_PER_BEAT < LANES) ? FP16_PER_BEAT : LANES;

  // ---------------------------------------------------------------- control
  logic              bypass_q, req_start, rsp_start, req_busy;
  logic [ADDR_W-1:0] req_base;
  logic [31:0]       req_beats;
  logic [15:0]       cols_q;
  logic              c_rd_en;
  logic [SAW-1:0]    c_rd_addr;
  logic              res_valid;
  logic [15:0]       res_tile;
  logic [15:0]       res [LANES];
  logic              c_wr_en;
  logic [RW-1:0]     c_wr_row;
  logic [LANES-1:0]  c_wr_mask;
  logic [15:0]       c_wr_data [LANES];

  logic              beat_valid, beat_first, beat_last;
  logic [DDR_BITS-1:0] beat;
  logic [15:0]       beat_col, beat_tile;

  seedlm_ctrl #(.LANES(LANES), .DEPTH(DEPTH), .ADDR_W(ADDR_W)) u_ctrl (
    .clk, .rst_n, .start, .bypass, .rows, .cols, .w_base, .x_base, .y_base,
    .busy, .done, .cycles, .bypass_q,
    .req_start, .req_base, .req_beats, .req_fire(ddr_req_valid && ddr_req_ready),
    .rsp_start, .cols_q, .beat_valid, .beat_col,
    .rd_en(c_rd_en), .rd_addr(c_rd_addr),
    .res_valid, .res_tile, .res,
    .wr_en(c_wr_en), .wr_row(c_wr_row), .wr_mask(c_wr_mask), .wr_data(c_wr_data)
  );

  // ---------------------------------------------------------------- DDR interfaces
  ddr_req_if #(.ADDR_W(ADDR_W), .BEAT_BYTES(DDR_BITS / 8)) u_req (
    .clk, .rst_n, .start(req_start), .base_addr(req_base), .num_beats(req_beats),
    .req_valid(ddr_req_valid), .req_ready(ddr_req_ready), .req_addr(ddr_req_addr), .busy(req_busy)
  );

  ddr_resp_if #(.BEAT_W(DDR_BITS)) u_rsp (
    .clk, .rst_n, .start(rsp_start), .cols(cols_q),
    .rsp_valid(ddr_rsp_valid), .rsp_data(ddr_rsp_data),
    .beat_valid, .beat, .col(beat_col), .tile(beat_tile), .first(beat_first), .last_col(beat_last)
  );

  // ---------------------------------------------------------------- activation SRAM
  logic             s_rd_en, s_wr_en;
  logic [SAW-1:0]   s_rd_addr;
  logic [15:0]      s_rd_data;
  logic [RW-1:0]    s_wr_row;
  logic [LANES-1:0] s_wr_mask;
  logic [15:0]      s_wr_data [LANES];

  always_comb begin
    if (busy) begin
      s_rd_en   = c_rd_en;
      s_rd_addr = c_rd_addr;
      s_wr_en   = c_wr_en;
      s_wr_row  = c_wr_row;
      s_wr_mask = c_wr_mask;
      s_wr_data = c_wr_data;
    end else begin
      s_rd_en   = host_rd_en;
      s_rd_addr = host_rd_addr;
      s_wr_en   = host_wr_en;
      s_wr_row  = RW'(32'(host_wr_addr) / LANES);
      s_wr_mask = LANES'(1) << (32'(host_wr_addr) % LANES);
      for (int l = 0; l < LANES; l++) s_wr_data[l] = host_wr_data;
    end
  end

  act_sram #(.DEPTH(DEPTH), .LANES(LANES)) u_sram (
    .clk, .rd_en(s_rd_en), .rd_addr(s_rd_addr), .rd_data(s_rd_data),
    .wr_en(s_wr_en), .wr_row(s_wr_row), .wr_mask(s_wr_mask), .wr_data(s_wr_data)
  );
  assign host_rd_data = s_rd_data;

  // ---------------------------------------------------------------- weight path
  logic                     dec_valid;
  logic signed [WFIX_W-1:0] dec_w   [LANES];
  logic signed [7:0]        dec_sh  [NBLK];

  lfsr_weight_decompress #(.K(K), .C(C), .P(P), .LANES(LANES), .BEAT_W(DDR_BITS), .WW(WFIX_W)) u_dec (
    .clk, .rst_n, .in_valid(beat_valid && !bypass_q), .beat,
    .out_valid(dec_valid), .wfix(dec_w), .wshift(dec_sh)
  );

  logic [15:0]  wconv [LANES];
  logic [LANES-1:0] wconv_valid;

  for (genvar l = 0; l < LANES; l++) begin : g_pre
    fix2fp16 #(.W(WFIX_W)) u_cvt (
      .clk, .rst_n, .in_valid(dec_valid), .x(dec_w[l]), .shift(dec_sh[l / C]),
      .out_valid(wconv_valid[l]), .y(wconv[l])
    );
  end

  // Bypass: FP16 weights straight from the beat, delayed to meet the converted ones.
  logic [NBYP*16-1:0] byp_w;
  delay_line #(.W(NBYP*16), .DEPTH(4)) u_byp_dly (.clk, .rst_n, .d(beat[NBYP*16-1:0]), .q(byp_w));

  // ---------------------------------------------------------------- activation and tags
  logic [15:0] x_mac;
  delay_line #(.W(16), .DEPTH(3)) u_x_dly (.clk, .rst_n, .d(s_rd_data), .q(x_mac));

  logic        m_valid, m_first, m_last, m_bypass;
  logic [15:0] m_tile;
  delay_line #(.W(20), .DEPTH(4)) u_tag_dly (
    .clk, .rst_n,
    .d({beat_valid, beat_first, beat_last, bypass_q, beat_tile}),
    .q({m_valid, m_first, m_last, m_bypass, m_tile})
  );

  logic [15:0] w_mac [LANES];
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      if (!m_bypass)      w_mac[l] = wconv[l];
      else if (l < NBYP)  w_mac[l] = byp_w[l*16 +: 16];
      else                w_mac[l] = 16'h0000;
    end
  end

  // ---------------------------------------------------------------- MACs and output conversion
  logic                    acc_valid;
  logic signed [ACC_W-1:0] acc [LANES];

  mac_array #(.LANES(LANES), .AW(ACC_W)) u_mac (
    .clk, .rst_n, .in_valid(m_valid), .first(m_first), .last(m_last),
    .w(w_mac), .x(x_mac), .acc_valid, .acc
  );

  logic [15:0] acc_tile;
  delay_line #(.W(16), .DEPTH(2)) u_tile_dly (.clk, .rst_n, .d(m_tile), .q(acc_tile));

  logic [LANES-1:0] res_valid_l;
  for (genvar l = 0; l < LANES; l++) begin : g_out
    fix2fp16 #(.W(ACC_W)) u_cvt (
      .clk, .rst_n, .in_valid(acc_valid), .x(acc[l]), .shift(8'(ACC_LSB)),
      .out_valid(res_valid_l[l]), .y(res[l])
    );
  end
  assign res_valid = res_valid_l[0];

  logic [15:0] t1;
  always_ff @(posedge clk) begin
    if (acc_valid) t1 <= acc_tile;
  end
  delay_line #(.W(16), .DEPTH(1)) u_res_tile_dly (.clk, .rst_n, .d(t1), .q(res_tile));

endmodule
