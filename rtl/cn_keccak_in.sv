// cn_keccak_in: the input Keccak of CryptoNight-Haven.
//
// Takes one input blob (at most MAX_BYTES = 135 bytes, so it fits in one
// 136-byte Keccak rate block), applies the original Keccak padding (0x01
// after the message, 0x80 in the last rate byte), runs Keccak-f[1600] and
// returns the whole 200-byte state, which carries the keys and data for the
// rest of the hash. Stream handshake on both sides (valid/ready); a tag
// travels with the job unchanged. Latency: one cycle to load plus 24 rounds.
// Only one job is in flight. The padding and rate are those of the
// CryptoNight reference; the single-block limit is this design's choice.
module cn_keccak_in import cn_pkg::*; #(
  parameter int unsigned MAX_BYTES = 135,
  parameter int unsigned TAG_W     = 7
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  logic [MAX_BYTES*8-1:0] in_data,
  input  logic [7:0]             in_len,
  input  logic [TAG_W-1:0]       in_tag,
  output logic                   out_valid,
  input  logic                   out_ready,
  output state_t                 out_state,
  output logic [TAG_W-1:0]       out_tag
);
  logic   perm_busy, perm_done, perm_start;
  state_t padded, perm_out;
  logic   have_out;

  always_comb begin
    padded = '0;
    for (int i = 0; i < int'(MAX_BYTES); i++)
      if (i < int'(in_len)) padded[8*i +: 8] = in_data[8*i +: 8];
    padded[8*in_len +: 8] = padded[8*in_len +: 8] ^ 8'h01;
    padded[8*135 +: 8]    = padded[8*135 +: 8] ^ 8'h80;
  end

  assign in_ready   = !perm_busy && !have_out && !perm_done;
  assign perm_start = in_valid && in_ready;

  keccak_f1600 u_perm (
    .clk, .rst_n, .start(perm_start), .state_in(padded),
    .busy(perm_busy), .done(perm_done), .state_out(perm_out)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_out <= 1'b0;
      out_tag  <= '0;
    end else begin
      if (perm_start) out_tag <= in_tag;
      if (perm_done) have_out <= 1'b1;
      else if (out_valid && out_ready) have_out <= 1'b0;
    end
  end

  assign out_valid = have_out;
  assign out_state = perm_out;

  initial assert (MAX_BYTES <= 135) else $error("cn_keccak_in: MAX_BYTES must be <= 135");
endmodule
