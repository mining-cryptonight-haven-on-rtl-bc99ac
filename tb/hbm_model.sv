// hbm_model: behavioural model of one HBM pseudo-channel port as seen by
// the miner (not synthesizable).
//
// Accepts word requests on a valid/ready port; ready is withheld at random
// (STALL_PCT percent of cycles) to exercise back-pressure. Writes update the
// shared store in hbm_pkg at once; reads are answered in order LATENCY
// cycles after acceptance, with valid/ready on the response side. Checks
// that a request stays stable while it waits for ready.
module hbm_model import cn_pkg::*; #(
  parameter int unsigned LATENCY   = 4,
  parameter int unsigned STALL_PCT = 20
) (
  input  logic     clk,
  input  logic     req_valid,
  output logic     req_ready,
  input  mem_req_t req,
  output logic     rsp_valid,
  input  logic     rsp_ready,
  output block_t   rsp_data,
  output int       stalls,
  output int       reads,
  output int       writes
);
  typedef struct { longint unsigned due; logic [127:0] data; } rsp_t;
  rsp_t q [$];
  longint unsigned cyc = 0;
  logic req_ready_q = 1'b1;
  logic rsp_valid_q = 1'b0;
  block_t rsp_data_q = '0;
  logic prev_wait = 1'b0;
  mem_req_t prev_req;

  // All outputs are registers updated with nonblocking assignments, so the
  // model never races with the design it is connected to.
  assign req_ready = req_ready_q;
  assign rsp_valid = rsp_valid_q;
  assign rsp_data  = rsp_data_q;

  initial begin stalls = 0; reads = 0; writes = 0; end

  always @(posedge clk) begin
    cyc = cyc + 1;
    if (prev_wait)
      assert (req_valid && req == prev_req) else $error("hbm_model: request changed while waiting");
    prev_wait <= req_valid && !req_ready_q;
    prev_req  <= req;
    if (req_valid && req_ready_q) begin
      if (req.write) begin
        hbm_pkg::words[req.addr >> 4] = req.wdata;
        writes <= writes + 1;
      end else begin
        q.push_back('{due: cyc + LATENCY - 1, data: hbm_pkg::rd(req.addr >> 4)});
        reads <= reads + 1;
      end
    end
    if (!rsp_valid_q || rsp_ready) begin
      if (q.size() > 0 && q[0].due <= cyc) begin
        rsp_valid_q <= 1'b1;
        rsp_data_q  <= q[0].data;
        void'(q.pop_front());
      end else begin
        rsp_valid_q <= 1'b0;
      end
    end
    if (req_valid && !req_ready_q) stalls <= stalls + 1;
    req_ready_q <= ($urandom_range(99) >= STALL_PCT);
  end
endmodule
