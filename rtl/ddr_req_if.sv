// ddr_req_if: DDR read request generator.
//
// On `start` it issues num_beats read requests for consecutive 64-byte beats, the first at
// base_addr, towards the DDR controller, one per cycle as fast as req_ready allows. The
// paper names this interface; the valid/ready handshake, byte addressing and the absence
// of a limit on outstanding reads (the datapath behind the response interface never stalls)
// are this design's choices.
//
// Handshake: a request is taken in a cycle with req_valid && req_ready; req_addr holds
// steady while req_valid waits for req_ready. busy stays high from start until the last
// request has been taken. A start while busy is ignored.
module ddr_req_if #(
  parameter int unsigned ADDR_W     = 32,
  parameter int unsigned BEAT_BYTES = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [ADDR_W-1:0] base_addr,
  input  logic [31:0]       num_beats,
  output logic              req_valid,
  input  logic              req_ready,
  output logic [ADDR_W-1:0] req_addr,
  output logic              busy
);

  logic [31:0] left;

  assign req_valid = busy;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      left     <= '0;
      req_addr <= '0;
    end else if (!busy) begin
      if (start && num_beats != 0) begin
        busy     <= 1'b1;
        left     <= num_beats;
        req_addr <= base_addr;
      end
    end else if (req_ready) begin
      req_addr <= req_addr + ADDR_W'(BEAT_BYTES);
      left     <= left - 1;
      if (left == 1) busy <= 1'b0;
    end
  end

  // A waiting request keeps its address.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (req_valid && !req_ready) |=> (req_valid && $stable(req_addr));
  endproperty
  a_hold: assert property (p_hold);

endmodule
