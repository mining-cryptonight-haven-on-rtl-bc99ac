// groestl256: Groestl-256 of the 200-byte CryptoNight state (one of the four
// final hashes).
//
// The 64-byte state is an 8x8 byte matrix, byte i in row i%8, column i/8.
// The fixed-length message pads to four 64-byte blocks (0x80 after the 200
// bytes, zeros, and the block count 4 as a 64-bit big-endian number). Each
// block is compressed as h = P(h ^ m) ^ Q(m) ^ h, with P and Q each run for
// 10 rounds side by side, one round per clock. The output transformation
// runs P once more on h and keeps the last 32 bytes of P(h) ^ h. A hash
// takes 5*10 + 5 cycles after start. The paper names the scheme only (its
// figure spells it "Grost1"); the algorithm is the standard Groestl-256
// used by the CryptoNight reference. Digest byte i is in bits [8i+7:8i];
// msg must stay stable while busy is high.
module groestl256 import cn_pkg::*; (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  state_t       msg,
  output logic         busy,
  output logic         done,
  output logic [255:0] digest
);
  logic [2047:0] padded;
  logic [511:0]  h_q, p_q, q_q, p_n, q_n;
  logic [2:0]    blk_q;     // 0..3 message blocks, 4 = output transformation
  logic [3:0]    rnd_q;
  logic          fin_q;

  always_comb begin
    padded = '0;
    padded[1599:0] = msg;
    padded[8*200 +: 8] = 8'h80;
    padded[8*255 +: 8] = 8'h04;
  end

  function automatic logic [511:0] round(input logic [511:0] a, input logic [3:0] r, input bit isq);
    logic [7:0] s [64];
    logic [7:0] t [64];
    logic [511:0] o;
    int sh;
    for (int i = 0; i < 64; i++) s[i] = a[8*i +: 8];
    // AddRoundConstant
    for (int j = 0; j < 8; j++) begin
      if (isq) begin
        for (int i = 0; i < 8; i++) s[8*j+i] = s[8*j+i] ^ 8'hff;
        s[8*j+7] = s[8*j+7] ^ {j[3:0], 4'h0} ^ {4'h0, r};
      end else begin
        s[8*j] = s[8*j] ^ {j[3:0], 4'h0} ^ {4'h0, r};
      end
    end
    // SubBytes
    for (int i = 0; i < 64; i++) s[i] = SBOX[s[i]];
    // ShiftBytes: row i rotates left by sigma[i]
    for (int j = 0; j < 8; j++)
      for (int i = 0; i < 8; i++) begin
        sh = !isq ? i : (i < 4) ? (2*i + 1) : (2*(i - 4));   // Q: 1,3,5,7,0,2,4,6
        t[8*j+i] = s[8*((j + sh) % 8) + i];
      end
    // MixBytes: circ(02,02,03,04,05,03,05,07)
    for (int j = 0; j < 8; j++)
      for (int i = 0; i < 8; i++) begin
        logic [7:0] v;
        v = '0;
        for (int k = 0; k < 8; k++) begin
          case ((k - i + 8) % 8)
            0, 1:    v = v ^ xtime(t[8*j+k]);
            2, 5:    v = v ^ xtime(t[8*j+k]) ^ t[8*j+k];
            3:       v = v ^ xtime(xtime(t[8*j+k]));
            4, 6:    v = v ^ xtime(xtime(t[8*j+k])) ^ t[8*j+k];
            default: v = v ^ xtime(xtime(t[8*j+k])) ^ xtime(t[8*j+k]) ^ t[8*j+k];
          endcase
        end
        o[8*(8*j+i) +: 8] = v;
      end
    return o;
  endfunction

  assign p_n = round(p_q, rnd_q, 1'b0);
  assign q_n = round(q_q, rnd_q, 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; h_q <= '0; p_q <= '0; q_q <= '0;
      blk_q <= '0; rnd_q <= '0; fin_q <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy && start) begin
        logic [511:0] iv;
        iv = '0;
        iv[8*62 +: 8] = 8'h01;   // output length 256, big-endian in the last two bytes
        busy  <= 1'b1;
        blk_q <= '0;
        rnd_q <= '0;
        fin_q <= 1'b0;
        h_q   <= iv;
        p_q   <= iv ^ padded[511:0];
        q_q   <= padded[511:0];
      end else if (busy && !fin_q) begin
        p_q   <= p_n;
        q_q   <= q_n;
        rnd_q <= rnd_q + 4'd1;
        if (rnd_q == 4'd9) fin_q <= 1'b1;
      end else if (busy) begin
        fin_q <= 1'b0;
        rnd_q <= '0;
        if (blk_q == 3'd4) begin
          h_q  <= p_q ^ h_q;
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          logic [511:0] hn;
          logic [1:0]   nb;
          hn = p_q ^ q_q ^ h_q;
          nb = blk_q[1:0] + 2'd1;
          h_q   <= hn;
          blk_q <= blk_q + 3'd1;
          p_q   <= (blk_q == 3'd3) ? hn : (hn ^ padded[512*nb +: 512]);
          q_q   <= padded[512*nb +: 512];
        end
      end
    end
  end

  assign digest = h_q[511:256];
endmodule
