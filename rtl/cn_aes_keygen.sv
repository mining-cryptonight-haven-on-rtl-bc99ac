// cn_aes_keygen: CryptoNight round-key expansion.
//
// Expands 32 key bytes into the 10 round keys used by Explode and Implode:
// the first 40 words of the AES-256 key schedule (keys 0 and 1 are the key
// itself; RotWord/SubWord/Rcon on every 8th word, SubWord alone on every
// 8th+4 word). Combinational; round key k is keys[128k +: 128]. The paper
// states that 32 bytes are expanded to 10 round keys; the schedule is the
// AES-256 one of the CryptoNight reference.
module cn_aes_keygen import cn_pkg::*; (
  input  logic [255:0]  key,
  output logic [1279:0] keys
);
  always_comb begin
    logic [31:0] w [40];
    logic [31:0] t;
    logic [7:0]  rcon;
    rcon = 8'h01;
    for (int i = 0; i < 8; i++) w[i] = key[32*i +: 32];
    for (int i = 8; i < 40; i++) begin
      t = w[i-1];
      if (i % 8 == 0) begin
        t = {t[7:0], t[31:8]};  // RotWord: bytes [b0,b1,b2,b3] -> [b1,b2,b3,b0]
        t = {SBOX[t[31:24]], SBOX[t[23:16]], SBOX[t[15:8]], SBOX[t[7:0]] ^ rcon};
        rcon = xtime(rcon);
      end else if (i % 8 == 4) begin
        t = {SBOX[t[31:24]], SBOX[t[23:16]], SBOX[t[15:8]], SBOX[t[7:0]]};
      end
      w[i] = w[i-8] ^ t;
    end
    for (int i = 0; i < 40; i++) keys[32*i +: 32] = w[i];
  end
endmodule
