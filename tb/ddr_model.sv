// ddr_model: behavioural stand-in for the DDR3 controller and DRAM, for simulation only.
//
// Accepts read requests on a valid/ready port (byte addresses, BEAT_BYTES per beat) and
// returns the addressed beat LATENCY cycles later, in request order, at most one beat per
// cycle, with no backpressure on the response. Reset drops queued reads. With STALL_PCT > 0, req_ready drops at
// random in that percentage of cycles. The contents are the array `mem`, which the
// testbench fills directly. Not synthesizable.
module ddr_model #(
  parameter int unsigned BEAT_W     = 512,
  parameter int unsigned BEATS      = 1024,
  parameter int unsigned LATENCY    = 20,
  parameter int unsigned STALL_PCT  = 0,
  parameter int unsigned ADDR_W     = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [ADDR_W-1:0] req_addr,
  output logic              rsp_valid,
  output logic [BEAT_W-1:0] rsp_data
);

  logic [BEAT_W-1:0] mem [BEATS];
  longint unsigned   now = 0;
  int unsigned       stall_pct = STALL_PCT;
  longint unsigned   stalls = 0;

  typedef struct { longint unsigned due; int unsigned idx; } rd_t;
  rd_t q[$];

  initial begin
    req_ready = 1'b1;
    rsp_valid = 1'b0;
    rsp_data  = '0;
  end

  always @(posedge clk) begin
    now <= now + 1;
    if (!rst_n) begin
      q.delete();
    end else if (req_valid && req_ready) begin
      q.push_back('{due: now + LATENCY, idx: int'(req_addr / (BEAT_W / 8))});
    end
    if (req_valid && !req_ready) stalls <= stalls + 1;
    if (q.size() > 0 && q[0].due <= now) begin
      rd_t r;
      r = q.pop_front();
      rsp_valid <= 1'b1;
      rsp_data  <= mem[r.idx % BEATS];
    end else begin
      rsp_valid <= 1'b0;
    end
    req_ready <= ($urandom_range(99) >= stall_pct);
  end

endmodule
