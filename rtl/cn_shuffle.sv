// cn_shuffle: the memory-hard main loop of CryptoNight-Haven, interleaving
// up to SLOTS hashes.
//
// Each hash (slot t, scratchpad at byte t*MEM_BYTES) keeps a context: the
// 128-bit values a and b, the next scratchpad word index, its iteration
// count and a phase. One iteration has three read-modify-write steps on
// data-dependent addresses (l = scratchpad, i = word index):
//   phase 0  c = AES round of l[i] with key a;  l[i] = b ^ c;  b = c;
//            i = c.lo
//   phase 1  (hi,lo) = c.lo * l[i].lo (64x64 unsigned);  a.lo += hi,
//            a.hi += lo;  l[i] = a;  a ^= old l[i];  i = a.lo
//   phase 2  n = l[i].lo (signed 64), d = l[i][95:64] (signed 32),
//            q = n / (d | 5);  l[i].lo = n ^ q;  i = ~d ^ q
// ITERATIONS iterations run per hash; a and b start from the Keccak state
// as a = s[0:15]^s[32:47], b = s[16:31]^s[48:63], i = a.lo.
//
// Interleaving hides the memory latency: a queue holds the slots whose next
// read may be issued. The issue side pops a slot and sends its read; the
// slot's tag goes into an in-flight queue. When the (in-order) read data
// returns, the step is computed in one cycle, the write goes out on the
// same request port (it has priority over new reads), and the slot goes
// back to the ready queue, or to the done queue after its last step. A slot
// never has more than one access in flight, so each write reaches memory
// before that slot's next read. Slots in the done queue leave with their
// (unchanged) Keccak state on the output stream.
//
// What follows the paper: the three kinds of operation, the 128-hash
// interleaving with one scratchpad region per hash, and the dedicated
// memory port. What the paper leaves open and this design chooses: the
// exact step equations and the iteration count (taken from the
// CryptoNight-Heavy reference, Haven variant with ~d), single-cycle step
// logic (the paper's 500 MHz design would pipeline the multiplier and
// divider), and the queue-based scheduler.
//
// Lint notes: the done queue's fill count is not needed, and of the 64-bit
// value a step produces for the next address only the word-index bits
// inside the scratchpad are used (the address mask of the algorithm).
module cn_shuffle import cn_pkg::*; #(
  parameter int unsigned SLOTS      = 128,
  parameter int unsigned ITERATIONS = 262144,
  parameter int unsigned MEM_BYTES  = 4194304,
  parameter int unsigned TAG_W      = (SLOTS > 1) ? $clog2(SLOTS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  state_t           in_state,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output state_t           out_state,
  output logic [TAG_W-1:0] out_tag,
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output mem_req_t         mem_req,
  input  logic             mem_rsp_valid,
  output logic             mem_rsp_ready,
  input  block_t           mem_rsp_data,
  output logic [31:0]      n_active
);
  localparam int unsigned MLOG = $clog2(MEM_BYTES);
  localparam int unsigned IW   = MLOG - 4;               // word index width
  localparam int unsigned CW   = $clog2(ITERATIONS + 1);
  localparam int unsigned QD   = (SLOTS < 2) ? 2 : SLOTS;

  block_t           a_q     [SLOTS];
  block_t           b_q     [SLOTS];
  logic [IW-1:0]    idx_q   [SLOTS];
  logic [CW-1:0]    iter_q  [SLOTS];
  logic [1:0]       phase_q [SLOTS];
  state_t           state_q [SLOTS];

  // queues of slot tags
  logic             rq_in_valid, rq_in_ready, rq_out_valid, rq_out_ready;
  logic [TAG_W-1:0] rq_in_data, rq_out_data;
  logic             fq_in_ready, fq_out_valid, fq_out_ready;
  logic [TAG_W-1:0] fq_out_data;
  logic             dq_in_valid, dq_in_ready, dq_out_valid;
  logic [TAG_W-1:0] dq_out_data;
  logic [$clog2(QD):0] rq_count, fq_count, dq_count;

  // step datapath
  logic             rsp_fire, rsp_sel, rd_hold_q, last_step;
  logic [TAG_W-1:0] s;
  block_t           a_s, b_s, cx, wdata, a_n, b_n;
  logic [IW-1:0]    idx_n;
  logic [127:0]     prod;
  logic [63:0]      al, ah, n64, q64, dv64, idx64;
  logic [31:0]      d32;

  assign s     = fq_out_data;
  assign a_s   = a_q[s];
  assign b_s   = b_q[s];
  assign cx    = aes_round(mem_rsp_data, a_s);
  assign prod  = 128'(b_s[63:0]) * 128'(mem_rsp_data[63:0]);
  assign al    = a_s[63:0] + prod[127:64];
  assign ah    = a_s[127:64] + prod[63:0];
  assign n64   = mem_rsp_data[63:0];
  assign d32   = mem_rsp_data[95:64];
  assign dv64  = {{32{d32[31]}}, d32 | 32'd5};
  assign q64   = $signed(n64) / $signed(dv64);

  always_comb begin
    a_n   = a_s;
    b_n   = b_s;
    idx64 = '0;
    wdata = '0;
    unique case (phase_q[s])
      2'd0: begin
        wdata = b_s ^ cx;
        b_n   = cx;
        idx64 = cx[63:0];
      end
      2'd1: begin
        wdata = {ah, al};
        a_n   = {ah ^ mem_rsp_data[127:64], al ^ mem_rsp_data[63:0]};
        idx64 = al ^ mem_rsp_data[63:0];
      end
      default: begin
        wdata = {mem_rsp_data[127:64], n64 ^ q64};
        idx64 = {{32{~d32[31]}}, ~d32} ^ q64;
      end
    endcase
    idx_n = idx64[4 +: IW];
  end

  assign last_step = (phase_q[s] == 2'd2) && (iter_q[s] == CW'(ITERATIONS - 1));

  // A returning read is retired when its write can go out and its slot has
  // somewhere to go; reads are issued only when no response is waiting.
  assign rsp_fire      = rsp_sel && fq_out_valid && mem_req_ready &&
                         (last_step ? dq_in_ready : rq_in_ready);
  assign mem_rsp_ready = rsp_fire;
  assign fq_out_ready  = rsp_fire;

  // A read that was presented but not yet accepted is held (the request
  // must stay stable until accepted) before a waiting write may go out.
  assign rsp_sel       = mem_rsp_valid && !rd_hold_q;
  assign mem_req_valid = rsp_sel ? (fq_out_valid && (last_step ? dq_in_ready : rq_in_ready))
                                 : (rq_out_valid && fq_in_ready);
  assign mem_req.write = rsp_sel;
  assign mem_req.addr  = rsp_sel ? (64'(s) << MLOG) | (64'(idx_q[s]) << 4)
                                 : (64'(rq_out_data) << MLOG) | (64'(idx_q[rq_out_data]) << 4);
  assign mem_req.wdata = rsp_sel ? wdata : 128'd0;
  assign rq_out_ready  = !rsp_sel && fq_in_ready && mem_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_hold_q <= 1'b0;
    else        rd_hold_q <= mem_req_valid && !mem_req.write && !mem_req_ready;
  end

  // ready queue: retired slots first, new jobs when the port is free of them
  assign rq_in_valid = (rsp_fire && !last_step) || (in_valid && !(rsp_fire && !last_step));
  assign rq_in_data  = (rsp_fire && !last_step) ? s : in_tag;
  assign in_ready    = rq_in_ready && !(rsp_fire && !last_step);
  assign dq_in_valid = rsp_fire && last_step;

  stream_fifo #(.WIDTH(TAG_W), .DEPTH(QD)) u_ready_q (
    .clk, .rst_n, .in_valid(rq_in_valid), .in_ready(rq_in_ready), .in_data(rq_in_data),
    .out_valid(rq_out_valid), .out_ready(rq_out_ready), .out_data(rq_out_data), .count(rq_count));

  stream_fifo #(.WIDTH(TAG_W), .DEPTH(QD)) u_flight_q (
    .clk, .rst_n, .in_valid(rq_out_valid && rq_out_ready), .in_ready(fq_in_ready),
    .in_data(rq_out_data), .out_valid(fq_out_valid), .out_ready(fq_out_ready),
    .out_data(fq_out_data), .count(fq_count));

  stream_fifo #(.WIDTH(TAG_W), .DEPTH(QD)) u_done_q (
    .clk, .rst_n, .in_valid(dq_in_valid), .in_ready(dq_in_ready), .in_data(s),
    .out_valid(dq_out_valid), .out_ready(out_ready), .out_data(dq_out_data),
    .count(dq_count));

  assign out_valid = dq_out_valid;
  assign out_tag   = dq_out_data;
  assign out_state = state_q[dq_out_data];
  assign n_active  = 32'(rq_count) + 32'(fq_count);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      a_q[in_tag]     <= {in_state[127:64] ^ in_state[383:320], in_state[63:0] ^ in_state[319:256]};
      b_q[in_tag]     <= {in_state[255:192] ^ in_state[511:448], in_state[191:128] ^ in_state[447:384]};
      idx_q[in_tag]   <= in_state[4 +: IW] ^ in_state[256 + 4 +: IW];
      iter_q[in_tag]  <= '0;
      phase_q[in_tag] <= '0;
      state_q[in_tag] <= in_state;
    end
    if (rsp_fire) begin
      a_q[s]   <= a_n;
      b_q[s]   <= b_n;
      idx_q[s] <= idx_n;
      if (phase_q[s] == 2'd2) begin
        phase_q[s] <= 2'd0;
        iter_q[s]  <= iter_q[s] + 1'b1;
      end else begin
        phase_q[s] <= phase_q[s] + 2'd1;
      end
    end
  end
endmodule
