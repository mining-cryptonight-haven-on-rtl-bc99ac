// cn_implode: folds one hash's scratchpad back into its Keccak state.
//
// The 32 bytes state[32:63] are expanded into 10 AES round keys; the eight
// 16-byte blocks state[64:191] are the working data x. One pass reads the
// next 128 bytes of the scratchpad, XORs them into x, sends the eight blocks
// through the 10-stage AES pipeline and applies the CryptoNight-Heavy mix
// (x[i] ^= x[i+1], x[7] ^= old x[0]). The whole scratchpad is read twice
// (2*MEM_BYTES/128 passes), then EXTRA (16) passes run without memory. The
// final x replaces state[64:191] and the state is handed on.
//
// Memory: read-only use of the request port; the eight reads of the next
// pass are issued while the current pass is in the AES pipeline, into an
// 8-entry buffer, and responses come back in order (always accepted).
// Timing per pass: 8 feed cycles plus 10 pipeline cycles plus one mix cycle
// when memory keeps up. The paper gives the key bytes, the double read of
// the 4 MB scratchpad and the 16 extra passes; the per-pass mix is that of
// the CryptoNight-Heavy reference.
module cn_implode import cn_pkg::*; #(
  parameter int unsigned MEM_BYTES = 4194304,
  parameter int unsigned EXTRA     = 16,
  parameter int unsigned TAG_W     = 7
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
  input  block_t           mem_rsp_data
);
  localparam int unsigned NPASS = MEM_BYTES / 128;
  localparam int unsigned RPASS = 2 * NPASS;
  localparam int unsigned TOTAL = RPASS + EXTRA;
  localparam int unsigned PW    = $clog2(TOTAL + 1);
  localparam int unsigned MLOG  = $clog2(MEM_BYTES);

  typedef enum logic [2:0] {S_IDLE, S_KEYS, S_FEED, S_COLLECT, S_OUT} st_e;
  st_e st_q;

  state_t           state_q;
  logic [TAG_W-1:0] tag_q;
  logic [1279:0]    keys_c, keys_q;
  logic [1023:0]    x_q, xo_q, rbuf_q;
  logic [PW-1:0]    pass_q, rd_pass_q;
  logic [3:0]       feed_j, coll_j, rd_j, rcv_j;
  logic             pipe_out_valid, feed_ok, active_q;
  block_t           pipe_out, feed_blk;
  logic [63:0]      rd_off;

  cn_aes_keygen u_keygen (.key(state_q[511:256]), .keys(keys_c));

  // A pass that reads memory may start only when its 8 words are buffered.
  assign feed_ok  = (pass_q >= PW'(RPASS)) || (rcv_j == 4'd8);
  assign feed_blk = x_q[128*feed_j[2:0] +: 128] ^
                    ((pass_q < PW'(RPASS)) ? rbuf_q[128*feed_j[2:0] +: 128] : 128'd0);

  cn_aes10_pipe u_aes (
    .clk, .rst_n,
    .in_valid (st_q == S_FEED && feed_ok),
    .in_data  (feed_blk),
    .keys     (keys_q),
    .out_valid(pipe_out_valid),
    .out_data (pipe_out)
  );

  assign in_ready  = (st_q == S_IDLE);
  assign out_valid = (st_q == S_OUT);
  assign out_tag   = tag_q;
  always_comb begin
    out_state = state_q;
    out_state[8*64 +: 1024] = x_q;
  end

  // Reader: the buffer holds the words of pass rd_pass_q.
  logic [PW-1:0] rd_pass_mod;
  assign rd_pass_mod    = (rd_pass_q >= PW'(NPASS)) ? rd_pass_q - PW'(NPASS) : rd_pass_q;
  assign rd_off         = 64'(rd_pass_mod) * 64'd128 + 64'(rd_j) * 64'd16;
  assign mem_req_valid  = active_q && (rd_j != 4'd8) && (rd_pass_q < PW'(RPASS));
  assign mem_req.write  = 1'b0;
  assign mem_req.addr   = (64'(tag_q) << MLOG) + rd_off;
  assign mem_req.wdata  = '0;
  assign mem_rsp_ready  = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; state_q <= '0; tag_q <= '0; keys_q <= '0; x_q <= '0; xo_q <= '0;
      rbuf_q <= '0; pass_q <= '0; rd_pass_q <= '0; feed_j <= '0; coll_j <= '0;
      rd_j <= '0; rcv_j <= '0; active_q <= 1'b0;
    end else begin
      if (mem_req_valid && mem_req_ready) rd_j <= rd_j + 4'd1;
      if (mem_rsp_valid) begin
        rbuf_q[128*rcv_j[2:0] +: 128] <= mem_rsp_data;
        rcv_j <= rcv_j + 4'd1;
      end
      if (pipe_out_valid) begin
        xo_q[128*coll_j[2:0] +: 128] <= pipe_out;
        coll_j <= coll_j + 4'd1;
      end
      unique case (st_q)
        S_IDLE: if (in_valid) begin
          state_q   <= in_state;
          tag_q     <= in_tag;
          x_q       <= in_state[8*64 +: 1024];
          pass_q    <= '0;
          rd_pass_q <= '0;
          rd_j      <= '0;
          rcv_j     <= '0;
          active_q  <= 1'b1;
          st_q      <= S_KEYS;
        end
        S_KEYS: begin
          keys_q <= keys_c;
          feed_j <= '0;
          coll_j <= '0;
          st_q   <= S_FEED;
        end
        S_FEED: if (feed_ok) begin
          feed_j <= feed_j + 4'd1;
          if (feed_j == 4'd7) begin
            st_q <= S_COLLECT;
            if (pass_q < PW'(RPASS)) begin
              // buffer consumed: let the reader fetch the next pass
              rd_pass_q <= rd_pass_q + 1'b1;
              rd_j      <= '0;
              rcv_j     <= '0;
            end
          end
        end
        S_COLLECT: if (coll_j == 4'd8) begin
          x_q    <= mix8(xo_q);
          feed_j <= '0;
          coll_j <= '0;
          pass_q <= pass_q + 1'b1;
          st_q   <= (pass_q == PW'(TOTAL - 1)) ? S_OUT : S_FEED;
        end
        S_OUT: if (out_ready) begin
          st_q     <= S_IDLE;
          active_q <= 1'b0;
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  initial assert (MEM_BYTES % 128 == 0 && (MEM_BYTES & (MEM_BYTES - 1)) == 0)
    else $error("cn_implode: MEM_BYTES must be a power of two multiple of 128");
endmodule
