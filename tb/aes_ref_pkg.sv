// aes_ref_pkg: reference AES-256 for the testbenches, written apart from the
// RTL (byte arrays, S-box found by searching for the multiplicative inverse,
// key schedule on bytes) so that the design is checked against a second,
// unrelated implementation as well as against the FIPS-197 vector.
// Also the reference keystream of a 64-byte line and the test pattern of the
// plaintext weights.
package aes_ref_pkg;

  typedef logic [7:0] bytes16_t [16];

  function automatic logic [7:0] ref_mul(input logic [7:0] a, input logic [7:0] b);
    logic [15:0] p;
    p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= 16'(a) << i;
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= 16'h11b << (i - 8);
    return p[7:0];
  endfunction

  function automatic logic [7:0] ref_sbox(input logic [7:0] x);
    logic [7:0] inv, s;
    inv = 8'h00;
    for (int y = 1; y < 256; y++) if (ref_mul(x, 8'(y)) == 8'h01) inv = 8'(y);
    s = 8'h63;
    for (int i = 0; i < 8; i++)
      s[i] = s[i] ^ inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    return s;
  endfunction

  logic [7:0] sb [256];
  bit         sb_done = 0;

  function automatic void build_sbox();
    if (sb_done) return;
    for (int i = 0; i < 256; i++) sb[i] = ref_sbox(8'(i));
    sb_done = 1;
  endfunction

  // AES-256 encrypt of one block (128-bit values are MSB-first byte strings)
  function automatic logic [127:0] ref_aes256(input logic [255:0] key, input logic [127:0] pt);
    logic [7:0] w [240];
    logic [7:0] st [16];
    logic [7:0] t  [16];
    logic [7:0] tmp [4];
    logic [7:0] rc, x;
    logic [127:0] out;
    build_sbox();
    for (int i = 0; i < 32; i++) w[i] = key[255-8*i -: 8];
    rc = 8'h01;
    for (int i = 8; i < 60; i++) begin
      for (int k = 0; k < 4; k++) tmp[k] = w[4*(i-1)+k];
      if (i % 8 == 0) begin
        x = tmp[0]; tmp[0] = tmp[1]; tmp[1] = tmp[2]; tmp[2] = tmp[3]; tmp[3] = x;
        for (int k = 0; k < 4; k++) tmp[k] = sb[tmp[k]];
        tmp[0] ^= rc;
        rc = ref_mul(rc, 8'h02);
      end else if (i % 8 == 4) begin
        for (int k = 0; k < 4; k++) tmp[k] = sb[tmp[k]];
      end
      for (int k = 0; k < 4; k++) w[4*i+k] = w[4*(i-8)+k] ^ tmp[k];
    end
    for (int i = 0; i < 16; i++) st[i] = pt[127-8*i -: 8] ^ w[i];
    for (int r = 1; r <= 14; r++) begin
      for (int i = 0; i < 16; i++) st[i] = sb[st[i]];
      for (int c = 0; c < 4; c++) for (int rr = 0; rr < 4; rr++) t[4*c+rr] = st[4*((c+rr)%4)+rr];
      if (r != 14) begin
        for (int c = 0; c < 4; c++) begin
          st[4*c]   = ref_mul(t[4*c],8'h02)^ref_mul(t[4*c+1],8'h03)^t[4*c+2]^t[4*c+3];
          st[4*c+1] = t[4*c]^ref_mul(t[4*c+1],8'h02)^ref_mul(t[4*c+2],8'h03)^t[4*c+3];
          st[4*c+2] = t[4*c]^t[4*c+1]^ref_mul(t[4*c+2],8'h02)^ref_mul(t[4*c+3],8'h03);
          st[4*c+3] = ref_mul(t[4*c],8'h03)^t[4*c+1]^t[4*c+2]^ref_mul(t[4*c+3],8'h02);
        end
      end else begin
        for (int i = 0; i < 16; i++) st[i] = t[i];
      end
      for (int i = 0; i < 16; i++) st[i] ^= w[16*r+i];
    end
    for (int i = 0; i < 16; i++) out[127-8*i -: 8] = st[i];
    return out;
  endfunction

  // Keystream for beat j (0..3) of the line at physical address a, as XOR
  // mask on the little-endian beat: counter = IV || a[37:6], with j XORed
  // into the two lowest IV bits; keystream byte k goes to byte lane k.
  function automatic logic [127:0] ref_ks_beat(input logic [255:0] key, input logic [95:0] iv,
                                               input logic [39:0] a, input int j);
    logic [127:0] ctr, ks, lanes;
    ctr = {iv ^ 96'(j), a[37:6]};
    ks  = ref_aes256(key, ctr);
    for (int k = 0; k < 16; k++) lanes[8*k +: 8] = ks[127-8*k -: 8];
    return lanes;
  endfunction

  // plaintext test pattern for the 16-byte beat at byte address a
  function automatic logic [127:0] ref_plain(input logic [39:0] a);
    logic [31:0] h;
    logic [127:0] v;
    h = 32'(a[39:4] * 32'h9e3779b1) + 32'h7f4a7c15;
    for (int k = 0; k < 4; k++) begin
      h = (h ^ (h >> 15)) * 32'h2c1b3c6d;
      v[32*k +: 32] = h;
    end
    return v;
  endfunction

endpackage
