// aes_ref_pkg: a reference model of AES-256 encryption and CBC mode for the
// testbenches.
//
// It is written independently of the RTL: the S-box is not a table but is
// derived from its definition (multiplicative inverse in GF(2^8) followed by
// the affine map), the state is a byte array, and the key schedule works
// word by word exactly as FIPS-197 lists it. Nothing here is synthesisable
// on purpose; it only has to be obviously right.
package aes_ref_pkg;

  typedef logic [7:0] b8;

  function automatic b8 gmul(input b8 a, input b8 b);
    b8 p = 8'h00;
    for (int i = 0; i < 8; i++) begin
      if (b[0]) p ^= a;
      a = a[7] ? ((a << 1) ^ 8'h1b) : (a << 1);
      b = b >> 1;
    end
    return p;
  endfunction

  function automatic b8 ginv(input b8 a);
    if (a == 0) return 8'h00;
    for (int x = 1; x < 256; x++) if (gmul(a, b8'(x)) == 8'h01) return b8'(x);
    return 8'h00;
  endfunction

  function automatic b8 ref_sbox(input b8 a);
    b8 x = ginv(a), s;
    for (int i = 0; i < 8; i++)
      s[i] = x[i] ^ x[(i + 4) % 8] ^ x[(i + 5) % 8] ^ x[(i + 6) % 8] ^ x[(i + 7) % 8] ^ 1'((8'h63 >> i) & 1);
    return s;
  endfunction

  // S-box cache, filled on first use
  b8  sb [256];
  bit sb_ok = 0;
  function automatic b8 S(input b8 a);
    if (!sb_ok) begin
      for (int i = 0; i < 256; i++) sb[i] = ref_sbox(b8'(i));
      sb_ok = 1;
    end
    return sb[a];
  endfunction

  // all 60 key-schedule words of a 256-bit key
  function automatic void expand(input logic [255:0] key, output logic [31:0] w [60]);
    logic [31:0] t;
    b8 rc = 8'h01;
    for (int i = 0; i < 8; i++) w[i] = key[255 - 32*i -: 32];
    for (int i = 8; i < 60; i++) begin
      t = w[i-1];
      if (i % 8 == 0) begin
        t = {t[23:0], t[31:24]};
        t = {S(t[31:24]), S(t[23:16]), S(t[15:8]), S(t[7:0])} ^ {rc, 24'h0};
        rc = gmul(rc, 8'h02);
      end else if (i % 8 == 4) begin
        t = {S(t[31:24]), S(t[23:16]), S(t[15:8]), S(t[7:0])};
      end
      w[i] = w[i-8] ^ t;
    end
  endfunction

  function automatic logic [127:0] round_key(input logic [255:0] key, input int r);
    logic [31:0] w [60];
    expand(key, w);
    return {w[4*r], w[4*r+1], w[4*r+2], w[4*r+3]};
  endfunction

  function automatic logic [127:0] encrypt(input logic [255:0] key, input logic [127:0] pt);
    logic [31:0] w [60];
    b8 s [16], t [16];
    expand(key, w);
    for (int i = 0; i < 16; i++) s[i] = pt[127 - 8*i -: 8] ^ w[i/4][31 - 8*(i%4) -: 8];
    for (int r = 1; r <= 14; r++) begin
      for (int i = 0; i < 16; i++) s[i] = S(s[i]);
      // ShiftRows: state[r][c] = state[r][c+r]
      for (int c = 0; c < 4; c++) for (int row = 0; row < 4; row++) t[4*c+row] = s[4*((c+row)%4)+row];
      if (r != 14) begin
        for (int c = 0; c < 4; c++) begin
          s[4*c+0] = gmul(t[4*c], 2) ^ gmul(t[4*c+1], 3) ^ t[4*c+2] ^ t[4*c+3];
          s[4*c+1] = t[4*c] ^ gmul(t[4*c+1], 2) ^ gmul(t[4*c+2], 3) ^ t[4*c+3];
          s[4*c+2] = t[4*c] ^ t[4*c+1] ^ gmul(t[4*c+2], 2) ^ gmul(t[4*c+3], 3);
          s[4*c+3] = gmul(t[4*c], 3) ^ t[4*c+1] ^ t[4*c+2] ^ gmul(t[4*c+3], 2);
        end
      end else begin
        s = t;
      end
      for (int i = 0; i < 16; i++) s[i] ^= w[4*r + i/4][31 - 8*(i%4) -: 8];
    end
    for (int i = 0; i < 16; i++) encrypt[127 - 8*i -: 8] = s[i];
  endfunction

  // CBC: ciphertext of block i given the previous ciphertext (or the IV)
  function automatic logic [127:0] cbc_step(input logic [255:0] key, input logic [127:0] prev,
                                            input logic [127:0] pt);
    return encrypt(key, pt ^ prev);
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
