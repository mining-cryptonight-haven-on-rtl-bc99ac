// cn_miner_top: one CryptoNight-Haven mining kernel.
//
// Dataflow (one hash = one job carrying a tag and the 200-byte state):
//   input blob -> cn_keccak_in -> FIFO -> cn_explode -> clock-crossing FIFO
//   -> cn_shuffle (fast clock clk_sh) -> clock-crossing FIFO -> cn_implode
//   -> FIFO -> cn_final_hash -> 256-bit result
// Explode, Shuffle and Implode each have their own scratchpad memory port
// (Explode writes, Implode reads, Shuffle reads and writes); in the card
// these are HBM pseudo-channel ports. Every job in flight gets a tag 0 ..
// SLOTS-1, and its scratchpad is the MEM_BYTES region starting at byte
// tag*MEM_BYTES on all three ports, so up to SLOTS hashes (128) can be
// inside the kernel at once, most of them interleaved in Shuffle. Tags are
// handed out in rotation; a new blob is accepted only while fewer than
// SLOTS jobs are between the input and the end of Implode, and since every
// stage keeps job order a tag is never reused while its region is in use.
//
// Clocks: clk (200 MHz in the paper) for everything except Shuffle, which
// runs on clk_sh (500 MHz in the paper); each has its own active-low reset.
// Streams use valid/ready. Status counters are readable over AXI4-Lite
// (cn_status_regs): 0 blobs accepted, 1 explodes done, 2 implodes done,
// 3 hashes delivered, 4 input cycles held back by the slot limit, 5 Explode
// memory stall cycles, 6 Implode memory stall cycles, 7 clock cycles; the
// status word is the number of jobs in flight.
//
// From the paper: the stage structure and order, the scratchpad per hash
// partitioned by nonce, 128 hashes in flight, stream links with FIFOs, the
// two clock domains, a memory port per stage and AXI-Lite status registers.
// This design's choices: the simple word-wide memory port instead of AXI4
// bursts, the tag scheme, FIFO depths and the counter set.
//
// Lint notes: the fill counts of the two synchronous FIFOs are left open,
// and Shuffle's count of active hashes is not used by the kernel itself
// (test benches observe it).
module cn_miner_top import cn_pkg::*; #(
  parameter int unsigned SLOTS      = 128,
  parameter int unsigned MEM_BYTES  = 4194304,
  parameter int unsigned ITERATIONS = 262144,
  parameter int unsigned WARMUP     = 16,
  parameter int unsigned EXTRA      = 16,
  parameter int unsigned MAX_BYTES  = 135,
  parameter int unsigned TAG_W      = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clk_sh,
  input  logic                   rst_sh_n,
  // input blobs
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [MAX_BYTES*8-1:0] in_data,
  input  logic [7:0]             in_len,
  // results
  output logic                   out_valid,
  input  logic                   out_ready,
  output logic [255:0]           out_hash,
  output logic [1:0]             out_alg,
  output logic [TAG_W-1:0]       out_tag,
  // Explode scratchpad port (clk)
  output logic                   ex_mem_req_valid,
  input  logic                   ex_mem_req_ready,
  output mem_req_t               ex_mem_req,
  // Implode scratchpad port (clk)
  output logic                   im_mem_req_valid,
  input  logic                   im_mem_req_ready,
  output mem_req_t               im_mem_req,
  input  logic                   im_mem_rsp_valid,
  output logic                   im_mem_rsp_ready,
  input  block_t                 im_mem_rsp_data,
  // Shuffle scratchpad port (clk_sh)
  output logic                   sh_mem_req_valid,
  input  logic                   sh_mem_req_ready,
  output mem_req_t               sh_mem_req,
  input  logic                   sh_mem_rsp_valid,
  output logic                   sh_mem_rsp_ready,
  input  block_t                 sh_mem_rsp_data,
  // AXI4-Lite status registers (clk)
  input  logic                   s_awvalid,
  output logic                   s_awready,
  input  logic [11:0]            s_awaddr,
  input  logic                   s_wvalid,
  output logic                   s_wready,
  input  logic [31:0]            s_wdata,
  output logic                   s_bvalid,
  input  logic                   s_bready,
  output logic [1:0]             s_bresp,
  input  logic                   s_arvalid,
  output logic                   s_arready,
  input  logic [11:0]            s_araddr,
  output logic                   s_rvalid,
  input  logic                   s_rready,
  output logic [31:0]            s_rdata,
  output logic [1:0]             s_rresp
);
  typedef struct packed {
    logic [TAG_W-1:0] tag;
    state_t           state;
  } job_t;

  localparam int unsigned CW = $clog2(SLOTS + 1);

  // ------------------------------------------------------ slot allocation
  logic [TAG_W-1:0] next_tag_q, retire_tag_q;
  logic [CW-1:0]    in_flight_q;
  logic             kin_ready, accept, retire;

  assign in_ready = kin_ready && (in_flight_q < CW'(SLOTS));
  assign accept   = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next_tag_q <= '0; retire_tag_q <= '0; in_flight_q <= '0;
    end else begin
      if (accept) next_tag_q <= (next_tag_q == TAG_W'(SLOTS - 1)) ? '0 : next_tag_q + 1'b1;
      if (retire) retire_tag_q <= (retire_tag_q == TAG_W'(SLOTS - 1)) ? '0 : retire_tag_q + 1'b1;
      in_flight_q <= in_flight_q + CW'(accept) - CW'(retire);
    end
  end

  // ------------------------------------------------------------- stages
  logic   kin_valid, ex_in_valid, ex_in_ready, ex_out_valid, ex_out_ready;
  job_t   kin_job, ex_in_job, ex_out_job;
  logic   f0_ready;

  cn_keccak_in #(.MAX_BYTES(MAX_BYTES), .TAG_W(TAG_W)) u_keccak_in (
    .clk, .rst_n, .in_valid(in_valid && (in_flight_q < CW'(SLOTS))), .in_ready(kin_ready),
    .in_data, .in_len, .in_tag(next_tag_q),
    .out_valid(kin_valid), .out_ready(f0_ready), .out_state(kin_job.state), .out_tag(kin_job.tag));

  stream_fifo #(.WIDTH($bits(job_t)), .DEPTH(2)) u_fifo_kin (
    .clk, .rst_n, .in_valid(kin_valid), .in_ready(f0_ready), .in_data(kin_job),
    .out_valid(ex_in_valid), .out_ready(ex_in_ready), .out_data(ex_in_job), .count());

  cn_explode #(.MEM_BYTES(MEM_BYTES), .WARMUP(WARMUP), .TAG_W(TAG_W)) u_explode (
    .clk, .rst_n, .in_valid(ex_in_valid), .in_ready(ex_in_ready), .in_state(ex_in_job.state),
    .in_tag(ex_in_job.tag), .out_valid(ex_out_valid), .out_ready(ex_out_ready),
    .out_state(ex_out_job.state), .out_tag(ex_out_job.tag),
    .mem_req_valid(ex_mem_req_valid), .mem_req_ready(ex_mem_req_ready), .mem_req(ex_mem_req));

  logic sh_in_valid, sh_in_ready, sh_out_valid, sh_out_ready;
  job_t sh_in_job, sh_out_job;
  logic [31:0] sh_active;

  async_fifo #(.WIDTH($bits(job_t)), .DEPTH(4)) u_cdc_to_shuffle (
    .wclk(clk), .wrst_n(rst_n), .in_valid(ex_out_valid), .in_ready(ex_out_ready),
    .in_data(ex_out_job),
    .rclk(clk_sh), .rrst_n(rst_sh_n), .out_valid(sh_in_valid), .out_ready(sh_in_ready),
    .out_data(sh_in_job));

  cn_shuffle #(.SLOTS(SLOTS), .ITERATIONS(ITERATIONS), .MEM_BYTES(MEM_BYTES), .TAG_W(TAG_W)) u_shuffle (
    .clk(clk_sh), .rst_n(rst_sh_n), .in_valid(sh_in_valid), .in_ready(sh_in_ready),
    .in_state(sh_in_job.state), .in_tag(sh_in_job.tag), .out_valid(sh_out_valid),
    .out_ready(sh_out_ready), .out_state(sh_out_job.state), .out_tag(sh_out_job.tag),
    .mem_req_valid(sh_mem_req_valid), .mem_req_ready(sh_mem_req_ready), .mem_req(sh_mem_req),
    .mem_rsp_valid(sh_mem_rsp_valid), .mem_rsp_ready(sh_mem_rsp_ready),
    .mem_rsp_data(sh_mem_rsp_data), .n_active(sh_active));

  logic im_in_valid, im_in_ready, im_out_valid, im_out_ready;
  job_t im_in_job, im_out_job;

  async_fifo #(.WIDTH($bits(job_t)), .DEPTH(4)) u_cdc_from_shuffle (
    .wclk(clk_sh), .wrst_n(rst_sh_n), .in_valid(sh_out_valid), .in_ready(sh_out_ready),
    .in_data(sh_out_job),
    .rclk(clk), .rrst_n(rst_n), .out_valid(im_in_valid), .out_ready(im_in_ready),
    .out_data(im_in_job));

  cn_implode #(.MEM_BYTES(MEM_BYTES), .EXTRA(EXTRA), .TAG_W(TAG_W)) u_implode (
    .clk, .rst_n, .in_valid(im_in_valid), .in_ready(im_in_ready), .in_state(im_in_job.state),
    .in_tag(im_in_job.tag), .out_valid(im_out_valid), .out_ready(im_out_ready),
    .out_state(im_out_job.state), .out_tag(im_out_job.tag),
    .mem_req_valid(im_mem_req_valid), .mem_req_ready(im_mem_req_ready), .mem_req(im_mem_req),
    .mem_rsp_valid(im_mem_rsp_valid), .mem_rsp_ready(im_mem_rsp_ready),
    .mem_rsp_data(im_mem_rsp_data));

  assign retire = im_out_valid && im_out_ready;

  logic fh_in_valid, fh_in_ready;
  job_t fh_in_job;

  stream_fifo #(.WIDTH($bits(job_t)), .DEPTH(2)) u_fifo_fin (
    .clk, .rst_n, .in_valid(im_out_valid), .in_ready(im_out_ready), .in_data(im_out_job),
    .out_valid(fh_in_valid), .out_ready(fh_in_ready), .out_data(fh_in_job), .count());

  cn_final_hash #(.TAG_W(TAG_W)) u_final (
    .clk, .rst_n, .in_valid(fh_in_valid), .in_ready(fh_in_ready), .in_state(fh_in_job.state),
    .in_tag(fh_in_job.tag), .out_valid, .out_ready, .out_hash, .out_tag, .out_alg);

  // ------------------------------------------------------ status registers
  logic [7:0] events;
  assign events = {1'b1,
                   im_mem_req_valid && !im_mem_req_ready,
                   ex_mem_req_valid && !ex_mem_req_ready,
                   in_valid && kin_ready && !(in_flight_q < CW'(SLOTS)),
                   out_valid && out_ready,
                   retire,
                   ex_out_valid && ex_out_ready,
                   accept};

  cn_status_regs #(.NCNT(8)) u_status (
    .clk, .rst_n, .events, .status(32'(in_flight_q)),
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata, .s_bvalid, .s_bready,
    .s_bresp, .s_arvalid, .s_arready, .s_araddr, .s_rvalid, .s_rready, .s_rdata, .s_rresp);

  // Jobs leave Implode in the order their tags were handed out.
  a_job_order: assert property (@(posedge clk) retire |-> im_out_job.tag == retire_tag_q)
    else $error("cn_miner_top: job order broken");
endmodule
