// jh256: JH-256 of the 200-byte CryptoNight state (one of the four final
// hashes).
//
// JH keeps a 1024-bit chaining value H and compresses each 512-bit block M
// as F8(H, M): XOR M into the first half of H, apply the bijection E8, XOR
// M into the second half. E8 groups H into 256 four-bit elements (element
// 2i takes bits i, i+256, i+512, i+768 of H; element 2i+1 bits i+128,
// i+384, i+640, i+896) and runs 42 rounds R8: a 4-bit S-box on every
// element (S0 or S1, chosen by one bit of the round constant), the linear
// map L on each element pair, and the permutation P8. Round constants are
// not stored: they are generated on the fly, C(r+1) = R6(C(r)) with all
// constant bits zero, starting from the fixed C(0) of the JH specification.
// The initial value H(0) is likewise computed, as F8 applied to H(-1) =
// 0x0100 0...0 with an all-zero block. The 200-byte message pads to five
// blocks (0x80, zeros, 128-bit big-endian bit length 1600); the digest is
// the last 256 bits of H. Bits are numbered big-endian within bytes as in
// the specification; digest byte i is in bits [8i+7:8i].
//
// One round per clock: six compressions (IV plus five blocks) of 42 rounds
// and one finishing cycle each, 6*43 cycles after start. msg must stay
// stable while busy is high. The paper only names JH; this is the standard
// JH-256 (round 3) used by the CryptoNight reference.
module jh256 import cn_pkg::*; (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  state_t       msg,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  localparam logic [255:0] C0 = 256'h6a09e667f3bcc908b2fb1366ea957d3e3adec17512775099da2f590b0667322a;
  localparam logic [3:0] S0 [16] = '{9, 0, 4,11,13,12, 3,15, 1,10, 2, 6, 7, 5, 8,14};
  localparam logic [3:0] S1 [16] = '{3,12, 6,13, 5, 7, 1, 9,15, 2, 0, 4,11,10,14, 8};

  typedef logic [3:0] e256_t [256];
  typedef logic [3:0] e64_t  [64];

  // H as a bit string, H bit i at index 1023-i (bit 0 = MSB of byte 0)
  logic [1023:0] h_q;
  e256_t         a_q, a_n;
  logic [255:0]  c_q, c_n;
  logic [2:0]    blk_q;   // 0 = IV computation, 1..5 = message blocks
  logic [5:0]    rnd_q;
  logic [2559:0] padded;  // big-endian bit string of the padded message
  logic [511:0]  m_blk;

  always_comb begin
    padded = '0;
    for (int k = 0; k < 200; k++) padded[2559 - 8*k -: 8] = msg[8*k +: 8];
    padded[2559 - 8*200 -: 8] = 8'h80;
    padded[15:0] = 16'd1600;
  end
  assign m_blk = (blk_q == 3'd0) ? 512'd0 : padded[2559 - 512*(int'(blk_q) - 1) -: 512];

  function automatic void lmap(input logic [3:0] a, input logic [3:0] b,
                               output logic [3:0] c, output logic [3:0] d);
    d[3] = b[3] ^ a[2];
    d[2] = b[2] ^ a[1];
    d[1] = b[1] ^ a[0] ^ a[3];
    d[0] = b[0] ^ a[3];
    c[3] = a[3] ^ d[2];
    c[2] = a[2] ^ d[1];
    c[1] = a[1] ^ d[0] ^ d[3];
    c[0] = a[0] ^ d[3];
  endfunction

  // R8 on 256 elements: S-boxes, L, then P8 = phi . P' . pi
  function automatic e256_t round8(input e256_t a, input logic [255:0] c);
    e256_t s, p1, p2, p3;
    for (int i = 0; i < 256; i++) s[i] = c[255 - i] ? S1[a[i]] : S0[a[i]];
    for (int i = 0; i < 256; i += 2) lmap(s[i], s[i+1], s[i], s[i+1]);
    for (int i = 0; i < 64; i++) begin
      p1[4*i] = s[4*i]; p1[4*i+1] = s[4*i+1]; p1[4*i+2] = s[4*i+3]; p1[4*i+3] = s[4*i+2];
    end
    for (int i = 0; i < 128; i++) begin p2[i] = p1[2*i]; p2[i+128] = p1[2*i+1]; end
    p3 = p2;
    for (int i = 128; i < 256; i += 2) begin p3[i] = p2[i+1]; p3[i+1] = p2[i]; end
    return p3;
  endfunction

  // R6 with zero constant bits on the 256-bit round constant
  function automatic logic [255:0] round6(input logic [255:0] cin);
    e64_t a, s, p1, p2, p3;
    logic [255:0] o;
    for (int i = 0; i < 64; i++) a[i] = cin[255 - 4*i -: 4];
    for (int i = 0; i < 64; i++) s[i] = S0[a[i]];
    for (int i = 0; i < 64; i += 2) lmap(s[i], s[i+1], s[i], s[i+1]);
    for (int i = 0; i < 16; i++) begin
      p1[4*i] = s[4*i]; p1[4*i+1] = s[4*i+1]; p1[4*i+2] = s[4*i+3]; p1[4*i+3] = s[4*i+2];
    end
    for (int i = 0; i < 32; i++) begin p2[i] = p1[2*i]; p2[i+32] = p1[2*i+1]; end
    p3 = p2;
    for (int i = 32; i < 64; i += 2) begin p3[i] = p2[i+1]; p3[i+1] = p2[i]; end
    for (int i = 0; i < 64; i++) o[255 - 4*i -: 4] = p3[i];
    return o;
  endfunction

  function automatic e256_t group(input logic [1023:0] h);
    e256_t a;
    for (int i = 0; i < 128; i++) begin
      a[2*i]   = {h[1023-i], h[1023-(i+256)], h[1023-(i+512)], h[1023-(i+768)]};
      a[2*i+1] = {h[1023-(i+128)], h[1023-(i+384)], h[1023-(i+640)], h[1023-(i+896)]};
    end
    return a;
  endfunction

  function automatic logic [1023:0] degroup(input e256_t a);
    logic [1023:0] h;
    for (int i = 0; i < 128; i++) begin
      {h[1023-i], h[1023-(i+256)], h[1023-(i+512)], h[1023-(i+768)]} = a[2*i];
      {h[1023-(i+128)], h[1023-(i+384)], h[1023-(i+640)], h[1023-(i+896)]} = a[2*i+1];
    end
    return h;
  endfunction

  assign a_n = round8(a_q, c_q);
  assign c_n = round6(c_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; h_q <= '0; c_q <= '0; blk_q <= '0; rnd_q <= '0;
      for (int i = 0; i < 256; i++) a_q[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        // H(-1) = 0x0100 followed by zeros; first compression uses M = 0
        busy  <= 1'b1;
        blk_q <= '0;
        rnd_q <= '0;
        c_q   <= C0;
        h_q   <= {16'h0100, 1008'd0};
        a_q   <= group({16'h0100, 1008'd0});
      end else if (busy && rnd_q != 6'd42) begin
        a_q   <= a_n;
        c_q   <= c_n;
        rnd_q <= rnd_q + 6'd1;
      end else if (busy) begin
        logic [1023:0] hn;
        hn = degroup(a_q) ^ {512'd0, m_blk};
        h_q   <= hn;
        rnd_q <= '0;
        c_q   <= C0;
        if (blk_q == 3'd5) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          blk_q <= blk_q + 3'd1;
          a_q   <= group(hn ^ {padded[2559 - 512*int'(blk_q) -: 512], 512'd0});
        end
      end
    end
  end

  always_comb
    for (int k = 0; k < 32; k++) digest[8*k +: 8] = h_q[255 - 8*k -: 8];
endmodule
