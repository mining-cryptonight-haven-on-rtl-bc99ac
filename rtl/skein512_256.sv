// skein512_256: Skein-512-256 of the 200-byte CryptoNight state (one of the
// four final hashes).
//
// Skein chains Threefish-512 in UBI mode: for each 64-byte block,
// h = Threefish(key = h, tweak, block) ^ block. The chaining value starts
// at the published Skein-512-256 IV (the result of the configuration UBI
// block, a constant). The 200-byte message gives four message blocks (the
// last holds 8 bytes, zero-padded) with tweak positions 64, 128, 192, 200,
// type 48, "first" on block 0 and "final" on block 3; then one output block
// of eight zero bytes (type 63, position 8, first and final). The digest is
// the first 32 bytes of the result, byte i in bits [8i+7:8i].
//
// Threefish-512: 72 rounds of four MIX operations and a word permutation,
// with a subkey added every four rounds (19 subkeys from the 9 key words
// and 3 tweak words). This core computes one subkey addition and four
// rounds per clock: 18 cycles plus one for the last subkey, so a hash takes
// 5*19 cycles after start. msg must stay stable while busy is high.
// The paper only names Skein; this is the standard Skein-512-256 (v1.3)
// that the CryptoNight reference uses.
module skein512_256 import cn_pkg::*; (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  state_t       msg,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  typedef logic [63:0] w8_t [8];

  localparam w8_t IV = '{64'hCCD044A12FDB3E13, 64'hE83590301A79A9EB, 64'h55AEA0614F816E6F,
                         64'h2A2767A4AE9B94DB, 64'hEC06025E74DD7683, 64'hE7A436CDC4746251,
                         64'hC36FBAF9393AD185, 64'h3EEDBA1833EDFC13};
  localparam logic [63:0] C240 = 64'h1BD11BDAA9FC1A22;
  localparam int R [8][4] = '{'{46,36,19,37}, '{33,27,14,42}, '{17,49,36,39}, '{44, 9,54,56},
                              '{39,30,34,24}, '{13,50,10,17}, '{25,29,39,43}, '{ 8,35,56,22}};
  localparam int PI [8] = '{2, 1, 4, 7, 6, 5, 0, 3};

  w8_t          h_q, v_q, pt, v_n, sk;
  logic [63:0]  k [9];
  logic [63:0]  t [3];
  logic [2:0]   blk_q;   // 0..3 message, 4 output
  logic [4:0]   s_q;     // subkey index 0..18

  // plaintext block and tweak of block blk_q
  always_comb begin
    logic [511:0] b;
    logic [63:0]  pos;
    b   = (blk_q == 3'd4) ? 512'd0
        : (blk_q == 3'd3) ? 512'(msg[1599:1536]) : msg[512*blk_q[1:0] +: 512];
    pos = (blk_q == 3'd4) ? 64'd8 : (blk_q == 3'd3) ? 64'd200 : 64'(blk_q + 3'd1) * 64'd64;
    for (int i = 0; i < 8; i++) pt[i] = b[64*i +: 64];
    t[0] = pos;
    t[1] = (blk_q == 3'd4) ? {2'b11, 6'd63, 56'd0}
         : {(blk_q == 3'd3), (blk_q == 3'd0), 6'd48, 56'd0};
    t[2] = t[0] ^ t[1];
  end

  // key words and subkey s_q
  always_comb begin
    k[8] = C240;
    for (int i = 0; i < 8; i++) begin
      k[i] = h_q[i];
      k[8] = k[8] ^ h_q[i];
    end
    for (int i = 0; i < 8; i++) sk[i] = k[(int'(s_q) + i) % 9];
    sk[5] = sk[5] + t[int'(s_q) % 3];
    sk[6] = sk[6] + t[(int'(s_q) + 1) % 3];
    sk[7] = sk[7] + 64'(s_q);
  end

  function automatic logic [63:0] rol(input logic [63:0] x, input int n);
    return (x << n) | (x >> (64 - n));
  endfunction

  // subkey addition followed by four rounds
  always_comb begin
    w8_t v, p;
    for (int i = 0; i < 8; i++) v[i] = v_q[i] + sk[i];
    for (int d = 0; d < 4; d++) begin
      for (int j = 0; j < 4; j++) begin
        v[2*j]   = v[2*j] + v[2*j+1];
        v[2*j+1] = rol(v[2*j+1], R[4*int'(s_q[0]) + d][j]) ^ v[2*j];
      end
      for (int i = 0; i < 8; i++) p[i] = v[PI[i]];
      v = p;
    end
    v_n = v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; blk_q <= '0; s_q <= '0;
      for (int i = 0; i < 8; i++) begin h_q[i] <= '0; v_q[i] <= '0; end
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy  <= 1'b1;
        blk_q <= '0;
        s_q   <= '0;
        h_q   <= IV;
        for (int i = 0; i < 8; i++) v_q[i] <= msg[64*i +: 64];
      end else if (busy && s_q != 5'd18) begin
        v_q <= v_n;
        s_q <= s_q + 5'd1;
      end else if (busy) begin
        // last subkey, feed-forward of the plaintext
        w8_t hn;
        for (int i = 0; i < 8; i++) hn[i] = (v_q[i] + sk[i]) ^ pt[i];
        h_q <= hn;
        s_q <= '0;
        if (blk_q == 3'd4) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          blk_q <= blk_q + 3'd1;
          // next plaintext: message block or the zero output block
          for (int i = 0; i < 8; i++)
            v_q[i] <= (blk_q == 3'd3) ? 64'd0
                    : (blk_q == 3'd2) ? ((i == 0) ? msg[1536 +: 64] : 64'd0)
                    : msg[512*(int'(blk_q) + 1) + 64*i +: 64];
        end
      end
    end
  end

  always_comb
    for (int i = 0; i < 4; i++) digest[64*i +: 64] = h_q[i];
endmodule
