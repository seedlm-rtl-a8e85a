// tb_act_sram: checks the activation SRAM (reduced to 256 words of 16-lane rows) against a
// word-array model: random masked row writes and single-word reads, interleaved, with
// rd_data compared one cycle after each read. A read with rd_en low must leave rd_data
// unchanged.
module tb_act_sram;
  localparam int D = 256, L = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rd_en = 1'b0, wr_en = 1'b0;
  logic [7:0]  rd_addr = '0;
  logic [15:0] rd_data;
  logic [3:0]  wr_row = '0;
  logic [L-1:0] wr_mask = '0;
  logic [15:0] wr_data [L];

  act_sram #(.DEPTH(D), .LANES(L)) dut (.clk, .rd_en, .rd_addr, .rd_data, .wr_en, .wr_row, .wr_mask, .wr_data);

  int checks = 0, failures = 0;
  logic [15:0] model [D];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Fill every word once with full-row writes.
    for (int r = 0; r < D / L; r++) begin
      @(posedge clk); #1;
      wr_en = 1'b1; wr_row = 4'(r); wr_mask = '1;
      for (int l = 0; l < L; l++) begin
        wr_data[l] = 16'($urandom);
        model[r*L + l] = wr_data[l];
      end
    end
    for (int n = 0; n < 5000; n++) begin
      logic [15:0] held;
      @(posedge clk); #1;
      wr_en = $urandom_range(1);
      wr_row = 4'($urandom);
      wr_mask = L'($urandom);
      for (int l = 0; l < L; l++) wr_data[l] = 16'($urandom);
      rd_en = 1'b1;
      rd_addr = 8'($urandom);
      begin
        int a;
        logic [15:0] e;
        a = rd_addr;
        e = model[a];    // read sees the old contents when it hits the row being written
        if (wr_en) for (int l = 0; l < L; l++) if (wr_mask[l]) model[wr_row*L + l] = wr_data[l];
        @(posedge clk); #1;
        wr_en = 1'b0;
        rd_en = 1'b0;
        checks++;
        if (rd_data !== e) begin
          failures++;
          if (failures < 20) $display("FAIL: addr %0d got %h expected %h", a, rd_data, e);
        end
        held = rd_data;
        rd_addr = 8'($urandom);
        @(posedge clk); #1;
        checks++;
        if (rd_data !== held) begin failures++; $display("FAIL: rd_data changed without rd_en"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
