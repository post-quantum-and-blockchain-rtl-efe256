// aes256_key_expand: AES-256 key schedule with a round-key register file.
//
// The attestation kernel encrypts under one key, K_FPGA, built into the
// device. Rather than recompute round keys for every block, this module
// expands the key once (after reset, or whenever `load` is pulsed) and keeps
// all 15 round keys in a 15 x 128-bit register file that the cipher reads
// with a combinational port.
//
// How it works: round keys 0 and 1 are the two halves of the key. Every
// following round key k (2..14) is computed in one clock from round keys k-2
// and k-1 (FIPS-197 key expansion, four words at a time): for even k the last
// word of key k-1 goes through RotWord, SubWord and the round constant
// Rcon[k/2]; for odd k through SubWord alone.
//
// Interface: `load` (one cycle) samples `key`; `ready` rises when the last
// round key is written and stays high until the next `load`. `rd_idx`
// selects the round key on `rd_key` (combinational read).
// Timing: `ready` rises on the 14th clock edge counting the one that samples
// `load` (one edge stores keys 0/1, thirteen more compute keys 2..14).
//
// The paper fixes AES-256 and a pre-installed key; the iterative schedule and
// the register file are this design's choices.
module aes256_key_expand
  import aes_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     load,
  input  key256_t  key,
  output logic     ready,
  input  rk_idx_t  rd_idx,
  output block_t   rd_key
);

  block_t  rk [NUM_RK];
  rk_idx_t k;          // next round key to compute
  logic    running;

  function automatic byte_t rcon(input rk_idx_t kk);
    // Rcon[j] = x^(j-1), j = kk/2 ranges over 1..7 for AES-256
    byte_t r;
    r = 8'h01;
    for (int unsigned j = 2; j <= 7; j++)
      if (j <= int'(kk[3:1])) r = xtime(r);
    return r;
  endfunction

  function automatic block_t next_rk(input block_t p2, input block_t p1, input rk_idx_t kk);
    word_t t, w0, w1, w2, w3;
    t = p1[31:0];
    if (!kk[0]) t = sub_word({t[23:0], t[31:24]}) ^ {rcon(kk), 24'h0};
    else        t = sub_word(t);
    w0 = p2[127:96] ^ t;
    w1 = p2[95:64]  ^ w0;
    w2 = p2[63:32]  ^ w1;
    w3 = p2[31:0]   ^ w2;
    return {w0, w1, w2, w3};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_RK; i++) rk[i] <= '0;
      k       <= '0;
      running <= 1'b0;
      ready   <= 1'b0;
    end else if (load) begin
      rk[0]   <= key[255:128];
      rk[1]   <= key[127:0];
      k       <= 4'd2;
      running <= 1'b1;
      ready   <= 1'b0;
    end else if (running) begin
      rk[k] <= next_rk(rk[k - 4'd2], rk[k - 4'd1], k);
      if (k == rk_idx_t'(NR)) begin
        running <= 1'b0;
        ready   <= 1'b1;
      end else begin
        k <= k + 4'd1;
      end
    end
  end

  assign rd_key = (rd_idx < rk_idx_t'(NUM_RK)) ? rk[rd_idx] : '0;

endmodule
