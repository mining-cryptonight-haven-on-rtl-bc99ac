// cn_explode: fills one hash's scratchpad from its Keccak state.
//
// The 32 bytes state[0:31] are expanded into 10 AES round keys, and the
// eight 16-byte blocks state[64:191] are the working data. Each "pass" sends
// the eight blocks through the 10-stage AES pipeline (cn_aes10_pipe, one
// round key per stage). The first WARMUP passes (16) are followed by the
// CryptoNight-Heavy mix (x[i] ^= x[i+1], x[7] ^= old x[0]) and write
// nothing; every later pass writes its eight output blocks to the next 128
// bytes of the scratchpad, until MEM_BYTES are written. The scratchpad of
// job tag t starts at byte address t*MEM_BYTES, so hashes in flight use
// disjoint regions. Writes go out on the memory request port one word per
// accepted cycle (valid/ready, no response). When the last write has been
// accepted the unchanged state is handed on (out_valid/out_ready).
//
// Timing: 1 cycle to latch, 1 to expand keys, then per pass 8 feed cycles,
// 10 pipeline cycles and (after warm-up) 8 write cycles when the memory
// never stalls. The paper describes the key expansion, the 10 AES cores and
// the 4 MB output. The warm-up with mixing and the absence of mixing in the
// writing passes follow the CryptoNight-Heavy reference; the paper's text
// instead describes an XOR of the blocks between every pass.
module cn_explode import cn_pkg::*; #(
  parameter int unsigned MEM_BYTES = 4194304,
  parameter int unsigned WARMUP    = 16,
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
  output mem_req_t         mem_req
);
  localparam int unsigned NPASS  = MEM_BYTES / 128;
  localparam int unsigned TOTAL  = WARMUP + NPASS;
  localparam int unsigned PW     = $clog2(TOTAL + 1);
  localparam int unsigned MLOG   = $clog2(MEM_BYTES);

  typedef enum logic [2:0] {S_IDLE, S_KEYS, S_FEED, S_COLLECT, S_WRITE, S_OUT} st_e;
  st_e st_q;

  state_t           state_q;
  logic [TAG_W-1:0] tag_q;
  logic [1279:0]    keys_c, keys_q;
  logic [1023:0]    x_q, xo_q;
  logic [PW-1:0]    pass_q;
  logic [3:0]       feed_j, coll_j, wr_j;
  logic             pipe_out_valid;
  block_t           pipe_out;
  logic [63:0]      wr_off;

  cn_aes_keygen u_keygen (.key(state_q[255:0]), .keys(keys_c));

  cn_aes10_pipe u_aes (
    .clk, .rst_n,
    .in_valid (st_q == S_FEED),
    .in_data  (x_q[128*feed_j[2:0] +: 128]),
    .keys     (keys_q),
    .out_valid(pipe_out_valid),
    .out_data (pipe_out)
  );

  assign in_ready  = (st_q == S_IDLE);
  assign out_valid = (st_q == S_OUT);
  assign out_state = state_q;
  assign out_tag   = tag_q;

  assign wr_off             = 64'(pass_q - PW'(WARMUP)) * 64'd128 + 64'(wr_j) * 64'd16;
  assign mem_req_valid      = (st_q == S_WRITE);
  assign mem_req.write      = 1'b1;
  assign mem_req.addr       = (64'(tag_q) << MLOG) + wr_off;
  assign mem_req.wdata      = xo_q[128*wr_j[2:0] +: 128];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; state_q <= '0; tag_q <= '0; keys_q <= '0;
      x_q <= '0; xo_q <= '0; pass_q <= '0; feed_j <= '0; coll_j <= '0; wr_j <= '0;
    end else begin
      if (pipe_out_valid) begin
        xo_q[128*coll_j[2:0] +: 128] <= pipe_out;
        coll_j <= coll_j + 4'd1;
      end
      unique case (st_q)
        S_IDLE: if (in_valid) begin
          state_q <= in_state;
          tag_q   <= in_tag;
          x_q     <= in_state[8*64 +: 1024];
          pass_q  <= '0;
          st_q    <= S_KEYS;
        end
        S_KEYS: begin
          keys_q <= keys_c;
          feed_j <= '0;
          coll_j <= '0;
          st_q   <= S_FEED;
        end
        S_FEED: begin
          feed_j <= feed_j + 4'd1;
          if (feed_j == 4'd7) st_q <= S_COLLECT;
        end
        S_COLLECT: if (coll_j == 4'd8) begin
          feed_j <= '0;
          coll_j <= '0;
          wr_j   <= '0;
          if (pass_q < PW'(WARMUP)) begin
            x_q    <= mix8(xo_q);
            pass_q <= pass_q + 1'b1;
            st_q   <= S_FEED;
          end else begin
            x_q  <= xo_q;
            st_q <= S_WRITE;
          end
        end
        S_WRITE: if (mem_req_ready) begin
          wr_j <= wr_j + 4'd1;
          if (wr_j == 4'd7) begin
            pass_q <= pass_q + 1'b1;
            st_q   <= (pass_q == PW'(TOTAL - 1)) ? S_OUT : S_FEED;
          end
        end
        S_OUT: if (out_ready) st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  initial assert (MEM_BYTES % 128 == 0 && (MEM_BYTES & (MEM_BYTES - 1)) == 0)
    else $error("cn_explode: MEM_BYTES must be a power of two multiple of 128");
endmodule
