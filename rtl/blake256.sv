// blake256: BLAKE-256 of the 200-byte CryptoNight state (one of the four
// final hashes).
//
// The message length is fixed at 200 bytes, so padding is constant: the
// 256-byte padded message is the state, 0x80, zeros, 0x01 at byte 247 and
// the 64-bit big-endian bit length 1600. Four 64-byte blocks are compressed
// with counters 512, 1024, 1536 and 1600. Each compression runs 14 rounds,
// one round (four column G functions, then four diagonal G functions) per
// clock, then one cycle of finalisation, so a hash takes 4*15 cycles after
// start. The digest is the eight chaining words in big-endian byte order;
// digest byte i is in bits [8i+7:8i]. msg must stay stable while busy is
// high (the caller holds the state). The paper only names Blake; the
// algorithm is the standard BLAKE-256 used by the CryptoNight reference.
//
// Lint note: the G function and round-index helpers take 32-bit integer
// arguments of which only the low four bits (a state word index 0..15)
// are used.
module blake256 import cn_pkg::*; (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  state_t       msg,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  localparam logic [31:0] IV [8] = '{32'h6A09E667, 32'hBB67AE85, 32'h3C6EF372, 32'hA54FF53A,
                                     32'h510E527F, 32'h9B05688C, 32'h1F83D9AB, 32'h5BE0CD19};
  localparam logic [31:0] C [16] = '{32'h243F6A88, 32'h85A308D3, 32'h13198A2E, 32'h03707344,
                                     32'hA4093822, 32'h299F31D0, 32'h082EFA98, 32'hEC4E6C89,
                                     32'h452821E6, 32'h38D01377, 32'hBE5466CF, 32'h34E90C6C,
                                     32'hC0AC29B7, 32'hC97C50DD, 32'h3F84D5B5, 32'hB5470917};
  localparam logic [3:0] SIGMA [10][16] = '{
    '{ 0, 1, 2, 3, 4, 5, 6, 7, 8, 9,10,11,12,13,14,15},
    '{14,10, 4, 8, 9,15,13, 6, 1,12, 0, 2,11, 7, 5, 3},
    '{11, 8,12, 0, 5, 2,15,13,10,14, 3, 6, 7, 1, 9, 4},
    '{ 7, 9, 3, 1,13,12,11,14, 2, 6, 5,10, 4, 0,15, 8},
    '{ 9, 0, 5, 7, 2, 4,10,15,14, 1,11,12, 6, 8, 3,13},
    '{ 2,12, 6,10, 0,11, 8, 3, 4,13, 7, 5,15,14, 1, 9},
    '{12, 5, 1,15,14,13, 4,10, 0, 7, 6, 3, 9, 2, 8,11},
    '{13,11, 7,14,12, 1, 3, 9, 5, 0,15, 4, 8, 6, 2,10},
    '{ 6,15,14, 9,11, 3, 0, 8,12, 2,13, 7, 1, 4,10, 5},
    '{10, 2, 8, 4, 7, 6, 1, 5,15,11, 9,14, 3,12,13, 0}};

  typedef logic [31:0] w16_t [16];

  logic [2047:0] padded;
  logic [31:0]   h_q [8];
  logic [31:0]   v_q [16];
  logic [31:0]   m   [16];
  logic [1:0]    blk_q;
  logic [3:0]    rnd_q;
  logic          fin_q;
  w16_t          v_n;

  // constant padding of the 200-byte message
  always_comb begin
    padded = '0;
    padded[1599:0] = msg;
    padded[8*200 +: 8] = 8'h80;
    padded[8*247 +: 8] = 8'h01;
    padded[8*254 +: 8] = 8'h06;  // 1600 = 0x0640, big-endian
    padded[8*255 +: 8] = 8'h40;
    for (int w = 0; w < 16; w++)
      m[w] = {padded[8*(64*blk_q + 4*w) +: 8], padded[8*(64*blk_q + 4*w + 1) +: 8],
              padded[8*(64*blk_q + 4*w + 2) +: 8], padded[8*(64*blk_q + 4*w + 3) +: 8]};
  end

  function automatic logic [31:0] ror(input logic [31:0] x, input int n);
    return (x >> n) | (x << (32 - n));
  endfunction

  function automatic w16_t g(input w16_t v, input int a, input int b, input int c, input int d,
                             input logic [31:0] m0, input logic [31:0] m1,
                             input logic [31:0] c0, input logic [31:0] c1);
    w16_t o;
    o = v;
    o[a] = o[a] + o[b] + (m0 ^ c1);
    o[d] = ror(o[d] ^ o[a], 16);
    o[c] = o[c] + o[d];
    o[b] = ror(o[b] ^ o[c], 12);
    o[a] = o[a] + o[b] + (m1 ^ c0);
    o[d] = ror(o[d] ^ o[a], 8);
    o[c] = o[c] + o[d];
    o[b] = ror(o[b] ^ o[c], 7);
    return o;
  endfunction

  // one full round: columns then diagonals
  always_comb begin
    int r;
    logic [3:0] s [16];
    w16_t t;
    r = int'(rnd_q) % 10;
    for (int i = 0; i < 16; i++) s[i] = SIGMA[r][i];
    for (int i = 0; i < 16; i++) t[i] = v_q[i];
    t = g(t, 0, 4,  8, 12, m[s[0]],  m[s[1]],  C[s[0]],  C[s[1]]);
    t = g(t, 1, 5,  9, 13, m[s[2]],  m[s[3]],  C[s[2]],  C[s[3]]);
    t = g(t, 2, 6, 10, 14, m[s[4]],  m[s[5]],  C[s[4]],  C[s[5]]);
    t = g(t, 3, 7, 11, 15, m[s[6]],  m[s[7]],  C[s[6]],  C[s[7]]);
    t = g(t, 0, 5, 10, 15, m[s[8]],  m[s[9]],  C[s[8]],  C[s[9]]);
    t = g(t, 1, 6, 11, 12, m[s[10]], m[s[11]], C[s[10]], C[s[11]]);
    t = g(t, 2, 7,  8, 13, m[s[12]], m[s[13]], C[s[12]], C[s[13]]);
    t = g(t, 3, 4,  9, 14, m[s[14]], m[s[15]], C[s[14]], C[s[15]]);
    v_n = t;
  end

  // counter (bits hashed so far) for block b
  function automatic logic [31:0] ctr(input logic [1:0] b);
    return (b == 2'd3) ? 32'd1600 : 32'(b + 1) * 32'd512;
  endfunction

  task automatic init_v(input logic [31:0] h [8], input logic [1:0] b);
    for (int i = 0; i < 8; i++) v_q[i] <= h[i];
    for (int i = 0; i < 4; i++) v_q[8+i] <= C[i];
    v_q[12] <= ctr(b) ^ C[4];
    v_q[13] <= ctr(b) ^ C[5];
    v_q[14] <= C[6];
    v_q[15] <= C[7];
  endtask

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; blk_q <= '0; rnd_q <= '0; fin_q <= 1'b0;
      for (int i = 0; i < 8; i++) h_q[i] <= '0;
      for (int i = 0; i < 16; i++) v_q[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        busy  <= 1'b1;
        blk_q <= '0;
        rnd_q <= '0;
        fin_q <= 1'b0;
        for (int i = 0; i < 8; i++) h_q[i] <= IV[i];
        init_v(IV, 2'd0);
      end else if (busy && !fin_q) begin
        for (int i = 0; i < 16; i++) v_q[i] <= v_n[i];
        rnd_q <= rnd_q + 4'd1;
        if (rnd_q == 4'd13) fin_q <= 1'b1;
      end else if (busy) begin
        logic [31:0] hn [8];
        for (int i = 0; i < 8; i++) hn[i] = h_q[i] ^ v_q[i] ^ v_q[i+8];
        for (int i = 0; i < 8; i++) h_q[i] <= hn[i];
        fin_q <= 1'b0;
        rnd_q <= '0;
        if (blk_q == 2'd3) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          blk_q <= blk_q + 2'd1;
          init_v(hn, blk_q + 2'd1);
        end
      end
    end
  end

  always_comb
    for (int i = 0; i < 8; i++)
      for (int k = 0; k < 4; k++)
        digest[8*(4*i+k) +: 8] = h_q[i][31-8*k -: 8];
endmodule
