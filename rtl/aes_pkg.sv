// aes_pkg: types, constants and round functions shared by the AES-256-CBC
// attestation kernel.
//
// The kernel encrypts the attestation report of an FPGA edge node with
// AES-256 in CBC mode under a key that is built into the bitstream. This
// package holds what the key schedule, the cipher and the register front end
// all need: the 128-bit block and 256-bit key types, the S-box, GF(2^8)
// doubling, the four AES round transformations and the AXI4-Lite register map.
//
// Byte order follows FIPS-197: byte 0 of a block is bits [127:120], and the
// state is filled column by column, so byte 4*c+r sits in row r, column c.
// The S-box is the FIPS-197 table; the round functions are pure functions
// that synthesise to combinational logic.
//
// The register map and the default key are choices of this design; the paper
// fixes only the algorithm (AES-256, CBC) and that the key is pre-installed.
package aes_pkg;

  typedef logic [7:0]   byte_t;
  typedef logic [31:0]  word_t;
  typedef logic [127:0] block_t;
  typedef logic [255:0] key256_t;

  localparam int unsigned NR = 14;            // AES-256 rounds
  localparam int unsigned NUM_RK = NR + 1;    // round keys
  typedef logic [3:0] rk_idx_t;

  // Default device key K_FPGA. A placeholder (the AES-256 key of the
  // NIST SP 800-38A examples); each device's bitstream carries its own.
  localparam key256_t K_FPGA_DEFAULT =
    256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4;

  // AXI4-Lite register map (byte addresses)
  localparam int unsigned AXIL_ADDR_W = 8;
  localparam logic [AXIL_ADDR_W-1:0] REG_CTRL   = 8'h00; // W: [0] START, [1] FIRST
  localparam logic [AXIL_ADDR_W-1:0] REG_STATUS = 8'h04; // R: [0] BUSY [1] DONE [2] KEY_READY [31:16] blocks
  localparam logic [AXIL_ADDR_W-1:0] REG_IV0    = 8'h10; // RW: IV words 0..3 at 0x10..0x1C
  localparam logic [AXIL_ADDR_W-1:0] REG_PT0    = 8'h20; // RW: plaintext words 0..3 at 0x20..0x2C
  localparam logic [AXIL_ADDR_W-1:0] REG_CT0    = 8'h30; // R: ciphertext words 0..3 at 0x30..0x3C

  typedef enum logic [1:0] {
    RESP_OKAY   = 2'b00,
    RESP_SLVERR = 2'b10
  } axi_resp_e;

  localparam byte_t SBOX [256] = '{
    8'h63, 8'h7c, 8'h77, 8'h7b, 8'hf2, 8'h6b, 8'h6f, 8'hc5, 8'h30, 8'h01, 8'h67, 8'h2b, 8'hfe, 8'hd7, 8'hab, 8'h76,
    8'hca, 8'h82, 8'hc9, 8'h7d, 8'hfa, 8'h59, 8'h47, 8'hf0, 8'had, 8'hd4, 8'ha2, 8'haf, 8'h9c, 8'ha4, 8'h72, 8'hc0,
    8'hb7, 8'hfd, 8'h93, 8'h26, 8'h36, 8'h3f, 8'hf7, 8'hcc, 8'h34, 8'ha5, 8'he5, 8'hf1, 8'h71, 8'hd8, 8'h31, 8'h15,
    8'h04, 8'hc7, 8'h23, 8'hc3, 8'h18, 8'h96, 8'h05, 8'h9a, 8'h07, 8'h12, 8'h80, 8'he2, 8'heb, 8'h27, 8'hb2, 8'h75,
    8'h09, 8'h83, 8'h2c, 8'h1a, 8'h1b, 8'h6e, 8'h5a, 8'ha0, 8'h52, 8'h3b, 8'hd6, 8'hb3, 8'h29, 8'he3, 8'h2f, 8'h84,
    8'h53, 8'hd1, 8'h00, 8'hed, 8'h20, 8'hfc, 8'hb1, 8'h5b, 8'h6a, 8'hcb, 8'hbe, 8'h39, 8'h4a, 8'h4c, 8'h58, 8'hcf,
    8'hd0, 8'hef, 8'haa, 8'hfb, 8'h43, 8'h4d, 8'h33, 8'h85, 8'h45, 8'hf9, 8'h02, 8'h7f, 8'h50, 8'h3c, 8'h9f, 8'ha8,
    8'h51, 8'ha3, 8'h40, 8'h8f, 8'h92, 8'h9d, 8'h38, 8'hf5, 8'hbc, 8'hb6, 8'hda, 8'h21, 8'h10, 8'hff, 8'hf3, 8'hd2,
    8'hcd, 8'h0c, 8'h13, 8'hec, 8'h5f, 8'h97, 8'h44, 8'h17, 8'hc4, 8'ha7, 8'h7e, 8'h3d, 8'h64, 8'h5d, 8'h19, 8'h73,
    8'h60, 8'h81, 8'h4f, 8'hdc, 8'h22, 8'h2a, 8'h90, 8'h88, 8'h46, 8'hee, 8'hb8, 8'h14, 8'hde, 8'h5e, 8'h0b, 8'hdb,
    8'he0, 8'h32, 8'h3a, 8'h0a, 8'h49, 8'h06, 8'h24, 8'h5c, 8'hc2, 8'hd3, 8'hac, 8'h62, 8'h91, 8'h95, 8'he4, 8'h79,
    8'he7, 8'hc8, 8'h37, 8'h6d, 8'h8d, 8'hd5, 8'h4e, 8'ha9, 8'h6c, 8'h56, 8'hf4, 8'hea, 8'h65, 8'h7a, 8'hae, 8'h08,
    8'hba, 8'h78, 8'h25, 8'h2e, 8'h1c, 8'ha6, 8'hb4, 8'hc6, 8'he8, 8'hdd, 8'h74, 8'h1f, 8'h4b, 8'hbd, 8'h8b, 8'h8a,
    8'h70, 8'h3e, 8'hb5, 8'h66, 8'h48, 8'h03, 8'hf6, 8'h0e, 8'h61, 8'h35, 8'h57, 8'hb9, 8'h86, 8'hc1, 8'h1d, 8'h9e,
    8'he1, 8'hf8, 8'h98, 8'h11, 8'h69, 8'hd9, 8'h8e, 8'h94, 8'h9b, 8'h1e, 8'h87, 8'he9, 8'hce, 8'h55, 8'h28, 8'hdf,
    8'h8c, 8'ha1, 8'h89, 8'h0d, 8'hbf, 8'he6, 8'h42, 8'h68, 8'h41, 8'h99, 8'h2d, 8'h0f, 8'hb0, 8'h54, 8'hbb, 8'h16
  };

  function automatic byte_t sbox(input byte_t x);
    return SBOX[x];
  endfunction

  function automatic word_t sub_word(input word_t w);
    return {sbox(w[31:24]), sbox(w[23:16]), sbox(w[15:8]), sbox(w[7:0])};
  endfunction

  // multiplication by x (i.e. by 2) in GF(2^8) modulo x^8+x^4+x^3+x+1
  function automatic byte_t xtime(input byte_t b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic byte_t get_byte(input block_t s, input int unsigned i);
    return s[127 - 8*i -: 8];
  endfunction

  function automatic block_t sub_bytes(input block_t s);
    block_t o;
    for (int unsigned i = 0; i < 16; i++) o[127 - 8*i -: 8] = sbox(get_byte(s, i));
    return o;
  endfunction

  // row r is rotated left by r columns: out(r,c) = in(r,(c+r) mod 4)
  function automatic block_t shift_rows(input block_t s);
    block_t o;
    for (int unsigned c = 0; c < 4; c++)
      for (int unsigned r = 0; r < 4; r++)
        o[127 - 8*(4*c + r) -: 8] = get_byte(s, 4*((c + r) % 4) + r);
    return o;
  endfunction

  function automatic word_t mix_column(input word_t col);
    byte_t a0, a1, a2, a3;
    {a0, a1, a2, a3} = col;
    return {xtime(a0) ^ xtime(a1) ^ a1 ^ a2 ^ a3,
            a0 ^ xtime(a1) ^ xtime(a2) ^ a2 ^ a3,
            a0 ^ a1 ^ xtime(a2) ^ xtime(a3) ^ a3,
            xtime(a0) ^ a0 ^ a1 ^ a2 ^ xtime(a3)};
  endfunction

  function automatic block_t mix_columns(input block_t s);
    block_t o;
    for (int unsigned c = 0; c < 4; c++) o[127 - 32*c -: 32] = mix_column(s[127 - 32*c -: 32]);
    return o;
  endfunction

  // one encryption round; the last round leaves out MixColumns
  function automatic block_t enc_round(input block_t s, input block_t rk, input logic last);
    block_t t;
    t = shift_rows(sub_bytes(s));
    if (!last) t = mix_columns(t);
    return t ^ rk;
  endfunction

endpackage
