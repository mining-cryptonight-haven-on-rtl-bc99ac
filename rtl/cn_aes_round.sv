// cn_aes_round: one AES encryption round as a combinational core.
//
// out = MixColumns(SubBytes(ShiftRows(blk))) ^ key, the x86 AESENC round that
// CryptoNight uses in Explode, Implode and Shuffle. Blocks are 16 bytes, byte
// i in bits [8i+7:8i]. The S-box is computed at elaboration. Purely
// combinational; the caller registers the result.
module cn_aes_round import cn_pkg::*; (
  input  block_t blk,
  input  block_t key,
  output block_t out
);
  assign out = aes_round(blk, key);
endmodule
