// cn_pkg: types, constants and pure functions shared by the CryptoNight-Haven
// datapath.
//
// Byte order convention used everywhere: a 128-bit AES block and the 1600-bit
// Keccak state are little-endian byte arrays, byte i in bits [8i+7:8i]. A
// Keccak lane i is bits [64i+63:64i]. The AES S-box and the Keccak round
// constants are computed by constant functions at elaboration (GF(2^8)
// inversion plus affine map, and the Keccak LFSR), so no table is stored in
// the source. Memory port structs describe the simple request/response
// scratchpad bus used by Explode, Shuffle and Implode (this design's choice;
// the paper's kernel uses AXI4 masters on HBM).
package cn_pkg;

  typedef logic [127:0]  block_t;
  typedef logic [1599:0] state_t;
  typedef logic [7:0]    sbox_t [256];

  // Scratchpad memory port. Byte address; one 16-byte word per request.
  // Reads are answered in request order; writes get no response.
  typedef struct packed {
    logic        write;
    logic [63:0] addr;
    block_t      wdata;
  } mem_req_t;


  // ---------------------------------------------------------------- GF(2^8)
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] r, x;
    r = '0; x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) r = r ^ x;
      x = xtime(x);
    end
    return r;
  endfunction

  // S-box: multiplicative inverse via exp/log tables of generator 0x03,
  // followed by the AES affine map.
  function automatic sbox_t gen_sbox();
    sbox_t t;
    logic [7:0] ex [256];
    logic [7:0] lg [256];
    logic [7:0] p, inv, s;
    p = 8'h01;
    for (int i = 0; i < 255; i++) begin
      ex[i] = p;
      lg[p] = 8'(i);
      p = p ^ xtime(p);
    end
    ex[255] = ex[0];
    lg[0]   = 8'h00;
    for (int x = 0; x < 256; x++) begin
      inv = (x == 0) ? 8'h00 : ex[(255 - int'(lg[x])) % 255];
      s = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]} ^ {inv[4:0], inv[7:5]}
              ^ {inv[3:0], inv[7:4]} ^ 8'h63;
      t[x] = s;
    end
    return t;
  endfunction

  localparam sbox_t SBOX = gen_sbox();

  // ------------------------------------------------------------------ AES
  // One full AES encryption round (ShiftRows, SubBytes, MixColumns,
  // AddRoundKey), the operation of the x86 AESENC instruction.
  function automatic block_t aes_round(input block_t blk, input block_t key);
    logic [7:0] s [16];
    block_t o;
    for (int i = 0; i < 16; i++)
      s[i] = SBOX[blk[8*(4*(((i/4) + (i%4)) % 4) + (i%4)) +: 8]];
    for (int c = 0; c < 4; c++) begin
      logic [7:0] a0, a1, a2, a3;
      a0 = s[4*c]; a1 = s[4*c+1]; a2 = s[4*c+2]; a3 = s[4*c+3];
      o[8*(4*c)   +: 8] = xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3;
      o[8*(4*c+1) +: 8] = a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3;
      o[8*(4*c+2) +: 8] = a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3;
      o[8*(4*c+3) +: 8] = xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3);
    end
    return o ^ key;
  endfunction

  // CryptoNight "mix and propagate" of the eight 128-bit blocks:
  // x[i] ^= x[i+1] for i < 7, x[7] ^= old x[0].
  function automatic logic [1023:0] mix8(input logic [1023:0] x);
    logic [1023:0] y;
    for (int i = 0; i < 8; i++)
      y[128*i +: 128] = x[128*i +: 128] ^ x[128*((i+1)%8) +: 128];
    return y;
  endfunction

  // --------------------------------------------------------------- Keccak
  typedef logic [63:0] rc_t [24];

  function automatic rc_t gen_keccak_rc();
    rc_t t;
    logic [7:0] r;
    logic [63:0] w;
    r = 8'h01;
    for (int i = 0; i < 24; i++) begin
      w = '0;
      for (int j = 0; j < 7; j++) begin
        if (r[0]) w = w | (64'd1 << ((1 << j) - 1));
        r = r[7] ? ({r[6:0], 1'b0} ^ 8'h71) : {r[6:0], 1'b0};
      end
      t[i] = w;
    end
    return t;
  endfunction

  localparam rc_t KECCAK_RC = gen_keccak_rc();

  // Rotation offset of lane x+5y (rho step).
  function automatic int keccak_rot(input int lane);
    int x, y, nx;
    x = 1; y = 0;
    if (lane == 0) return 0;
    for (int t = 0; t < 24; t++) begin
      if (x + 5*y == lane) return ((t+1)*(t+2)/2) % 64;
      nx = y; y = (2*x + 3*y) % 5; x = nx;
    end
    return 0;
  endfunction

  function automatic logic [63:0] rol64(input logic [63:0] v, input int n);
    return (n == 0) ? v : ((v << n) | (v >> (64 - n)));
  endfunction

  // One Keccak-f[1600] round (theta, rho, pi, chi, iota).
  function automatic state_t keccak_round(input state_t s, input logic [63:0] rc);
    logic [63:0] a [25];
    logic [63:0] b [25];
    logic [63:0] c [5];
    logic [63:0] d [5];
    state_t o;
    for (int i = 0; i < 25; i++) a[i] = s[64*i +: 64];
    for (int x = 0; x < 5; x++) c[x] = a[x] ^ a[x+5] ^ a[x+10] ^ a[x+15] ^ a[x+20];
    for (int x = 0; x < 5; x++) d[x] = c[(x+4)%5] ^ rol64(c[(x+1)%5], 1);
    for (int i = 0; i < 25; i++) a[i] = a[i] ^ d[i%5];
    for (int x = 0; x < 5; x++)
      for (int y = 0; y < 5; y++)
        b[y + 5*((2*x + 3*y) % 5)] = rol64(a[x + 5*y], keccak_rot(x + 5*y));
    for (int i = 0; i < 25; i++)
      a[i] = b[i] ^ (~b[(i%5+1)%5 + 5*(i/5)] & b[(i%5+2)%5 + 5*(i/5)]);
    a[0] = a[0] ^ rc;
    for (int i = 0; i < 25; i++) o[64*i +: 64] = a[i];
    return o;
  endfunction

endpackage
