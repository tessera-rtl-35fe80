// tessera_pkg: constants, types and AES-256 round functions shared by the
// inline crypto engine (ICE) and its neighbours.
//
// The line size (64 B), the 256-bit session key, the 96-bit per-model nonce
// and the 32-bit line index of the counter CTR(P) = IV_base || floor(P/64)
// follow the architecture description. The 128-bit data path (one AES block
// per beat, four beats per line), the 40-bit physical address and the byte
// order conventions are this design's choices.
//
// Byte order: an AES block is held MSB-first, byte 0 in bits [127:120], as
// in FIPS-197 test vectors. An AXI beat is little-endian, byte lane k in bits
// [8k+7:8k]. Keystream byte k is XORed into byte lane k, so the ICE matches a
// software AES-CTR over the byte stream of the line.
//
// The S-box is not typed in: gen_sbox() computes it at elaboration from the
// GF(2^8) inverse and the affine map of FIPS-197.
package tessera_pkg;

  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned BEAT_BYTES  = 16;
  localparam int unsigned DATA_W      = BEAT_BYTES * 8;          // 128
  localparam int unsigned BEATS       = LINE_BYTES / BEAT_BYTES;  // 4
  localparam int unsigned KEY_W       = 256;
  localparam int unsigned IV_W        = 96;
  localparam int unsigned IDX_W       = 32;
  localparam int unsigned ADDR_W      = 40;
  localparam int unsigned AES_ROUNDS  = 14;
  localparam int unsigned SID_W       = 8;    // SMMU stream ID
  localparam int unsigned MTAG_W      = 4;    // memory tag (MTE-like colour)

  typedef logic [DATA_W-1:0]        block_t;
  typedef logic [ADDR_W-1:0]        paddr_t;
  typedef logic [KEY_W-1:0]         key_t;
  typedef logic [IV_W-1:0]          iv_t;
  typedef block_t [AES_ROUNDS:0]    rkeys_t;   // round keys 0..14

  // AXI response codes
  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_EXOKAY = 2'b01,
    RESP_SLVERR = 2'b10,
    RESP_DECERR = 2'b11
  } axi_resp_e;

  // ---------------------------------------------------------------- GF(2^8)
  function automatic logic [7:0] xtime(input logic [7:0] a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic logic [7:0] gmul(input logic [7:0] a, input logic [7:0] b);
    logic [7:0] p, x;
    p = '0; x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = xtime(x);
    end
    return p;
  endfunction

  // S-box table, computed: s(x) = affine(x^254)
  function automatic logic [255:0][7:0] gen_sbox();
    logic [255:0][7:0] t;
    logic [7:0] inv, sq, b;
    for (int x = 0; x < 256; x++) begin
      // x^254 = x^(2+4+8+16+32+64+128)
      inv = 8'h01;
      sq  = 8'(x);
      for (int k = 1; k < 8; k++) begin
        sq  = gmul(sq, sq);
        inv = gmul(inv, sq);
      end
      if (x == 0) inv = 8'h00;
      b = inv ^ {inv[6:0], inv[7]} ^ {inv[5:0], inv[7:6]}
              ^ {inv[4:0], inv[7:5]} ^ {inv[3:0], inv[7:4]} ^ 8'h63;
      t[x] = b;
    end
    return t;
  endfunction

  localparam logic [255:0][7:0] SBOX = gen_sbox();

  function automatic logic [7:0] sbox(input logic [7:0] a);
    return SBOX[a];
  endfunction

  function automatic logic [31:0] sub_word(input logic [31:0] w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

  // byte i of a block, byte 0 = MSB
  function automatic logic [7:0] bget(input block_t s, input int i);
    return s[127-8*i -: 8];
  endfunction

  // SubBytes + ShiftRows: out byte (r + 4c) = S(in byte (r + 4((c+r) mod 4)))
  function automatic block_t sub_shift(input block_t s);
    block_t o;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        o[127-8*(r+4*c) -: 8] = sbox(bget(s, r + 4*((c + r) % 4)));
    return o;
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t o;
    logic [7:0] a0, a1, a2, a3;
    for (int c = 0; c < 4; c++) begin
      a0 = bget(s, 4*c); a1 = bget(s, 4*c+1); a2 = bget(s, 4*c+2); a3 = bget(s, 4*c+3);
      o[127-8*(4*c)   -: 8] = xtime(a0) ^ (xtime(a1) ^ a1) ^ a2 ^ a3;
      o[127-8*(4*c+1) -: 8] = a0 ^ xtime(a1) ^ (xtime(a2) ^ a2) ^ a3;
      o[127-8*(4*c+2) -: 8] = a0 ^ a1 ^ xtime(a2) ^ (xtime(a3) ^ a3);
      o[127-8*(4*c+3) -: 8] = (xtime(a0) ^ a0) ^ a1 ^ a2 ^ xtime(a3);
    end
    return o;
  endfunction

  // One full round (rounds 1..13), or the last round without MixColumns.
  function automatic block_t aes_round(input block_t s, input block_t rk, input logic last);
    block_t t;
    t = sub_shift(s);
    if (!last) t = mix_columns(t);
    return t ^ rk;
  endfunction

  // AES-256 key schedule: 60 words, round key r = words 4r..4r+3.
  function automatic rkeys_t expand_key(input key_t key);
    logic [59:0][31:0] w;
    logic [31:0] tmp;
    logic [7:0]  rcon;
    rkeys_t rk;
    rcon = 8'h01;
    for (int i = 0; i < 8; i++) w[i] = key[255-32*i -: 32];
    for (int i = 8; i < 60; i++) begin
      tmp = w[i-1];
      if (i % 8 == 0) begin
        tmp  = sub_word({tmp[23:0], tmp[31:24]}) ^ {rcon, 24'h0};
        rcon = xtime(rcon);
      end else if (i % 8 == 4) begin
        tmp = sub_word(tmp);
      end
      w[i] = w[i-8] ^ tmp;
    end
    for (int r = 0; r <= AES_ROUNDS; r++)
      rk[r] = {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
    return rk;
  endfunction

  // Keystream block (MSB-first) to AXI beat byte lanes (little-endian).
  function automatic block_t ks_to_lanes(input block_t ks);
    block_t o;
    for (int k = 0; k < BEAT_BYTES; k++) o[8*k +: 8] = ks[127-8*k -: 8];
    return o;
  endfunction

endpackage
