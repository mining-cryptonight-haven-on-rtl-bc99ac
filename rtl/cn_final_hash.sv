// cn_final_hash: last stage of CryptoNight-Haven.
//
// Applies Keccak-f[1600] to the state coming out of Implode, then hashes the
// permuted 200-byte state with one of four hash functions chosen by its two
// least significant bits: 0 BLAKE-256, 1 Groestl-256, 2 JH-256, 3
// Skein-512-256. The four cores sit side by side and only the selected one
// is started; a multiplexer picks its digest for the 256-bit output. One job
// at a time, valid/ready on both sides, the tag passes through and out_alg
// reports which hash was used. Latency: 1 + 24 (Keccak) + 1 + hash latency
// (60 BLAKE, 55 Groestl, 258 JH, 95 Skein) + 1 cycles. The paper shows the
// Keccak, the four hashes and the output multiplexer; the select encoding
// follows the CryptoNight reference.
//
// Lint note: the busy outputs of the hash cores are not needed; the state
// machine waits for the selected core's done pulse.
module cn_final_hash import cn_pkg::*; #(
  parameter int unsigned TAG_W = 7
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  state_t           in_state,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [255:0]     out_hash,
  output logic [TAG_W-1:0] out_tag,
  output logic [1:0]       out_alg
);
  typedef enum logic [1:0] {S_IDLE, S_KECCAK, S_HASH, S_OUT} st_e;
  typedef enum logic [1:0] {ALG_BLAKE = 2'd0, ALG_GROESTL = 2'd1, ALG_JH = 2'd2, ALG_SKEIN = 2'd3} alg_e;
  st_e  st_q;
  alg_e alg_q;

  logic         k_busy, k_done;
  state_t       k_state;
  logic [3:0]   h_start, h_busy, h_done;
  logic [255:0] h_digest [4];

  keccak_f1600 u_keccak (.clk, .rst_n, .start(st_q == S_IDLE && in_valid), .state_in(in_state),
                         .busy(k_busy), .done(k_done), .state_out(k_state));

  // start the core selected by the permuted state one cycle after Keccak ends
  always_comb begin
    h_start = '0;
    h_start[k_state[1:0]] = k_done;
  end

  blake256     u_blake   (.clk, .rst_n, .start(h_start[0]), .msg(k_state), .busy(h_busy[0]),
                          .done(h_done[0]), .digest(h_digest[0]));
  groestl256   u_groestl (.clk, .rst_n, .start(h_start[1]), .msg(k_state), .busy(h_busy[1]),
                          .done(h_done[1]), .digest(h_digest[1]));
  jh256        u_jh      (.clk, .rst_n, .start(h_start[2]), .msg(k_state), .busy(h_busy[2]),
                          .done(h_done[2]), .digest(h_digest[2]));
  skein512_256 u_skein   (.clk, .rst_n, .start(h_start[3]), .msg(k_state), .busy(h_busy[3]),
                          .done(h_done[3]), .digest(h_digest[3]));

  assign in_ready  = (st_q == S_IDLE);
  assign out_valid = (st_q == S_OUT);
  assign out_hash  = h_digest[alg_q];
  assign out_alg   = alg_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; alg_q <= ALG_BLAKE; out_tag <= '0;
    end else begin
      unique case (st_q)
        S_IDLE:   if (in_valid) begin out_tag <= in_tag; st_q <= S_KECCAK; end
        S_KECCAK: if (k_done) begin alg_q <= alg_e'(k_state[1:0]); st_q <= S_HASH; end
        S_HASH:   if (h_done[alg_q]) st_q <= S_OUT;
        S_OUT:    if (out_ready) st_q <= S_IDLE;
        default:  st_q <= S_IDLE;
      endcase
    end
  end

  // the Keccak result must stay put while a hash core reads it
  a_keccak_idle: assert property (@(posedge clk) st_q == S_HASH |-> !k_busy);
endmodule
