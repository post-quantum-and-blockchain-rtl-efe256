// aes_cbc_engine: AES-256 in cipher-block-chaining (CBC) mode, encryption.
//
// CBC makes each ciphertext block depend on all blocks before it: plaintext
// block i is XORed with ciphertext block i-1 (with the IV for the first
// block) before it is encrypted. The engine keeps the last ciphertext in a
// chaining register, so software can feed a message of any number of blocks
// one block at a time, and starts a new message by raising `first`.
//
// Interface: `start` (accepted when `busy` is low) samples `pt`, `iv` and
// `first`. `done` pulses for one cycle when `ct` holds the new ciphertext
// block; `ct` stays valid until the next block completes. `blocks` counts
// the blocks finished since the last `first` (saturating at 16 bits). The
// round-key port (`rk_idx`/`rk`) goes to the key store.
// Timing: `done` comes 15 cycles after the cycle in which `start` is taken;
// the XOR with the chaining value happens in the start cycle.
//
// The paper fixes the mode (AES256-CBC); padding is left to software,
// which always supplies whole 128-bit blocks.
module aes_cbc_engine
  import aes_pkg::*;
(
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic         first,
  input  block_t       iv,
  input  block_t       pt,
  output logic         busy,
  output logic         done,
  output block_t       ct,
  output logic [15:0]  blocks,
  output rk_idx_t      rk_idx,
  input  block_t       rk
);

  block_t chain, chain_now;
  block_t cipher_in, cipher_out;
  logic   cipher_busy, cipher_done;

  // a block started in the same cycle as `done` must chain on the block
  // that is just finishing, not on the stale register
  assign chain_now = cipher_done ? cipher_out : chain;
  assign cipher_in = pt ^ (first ? iv : chain_now);

  aes256_cipher u_cipher (
    .clk       (clk),
    .rst_n     (rst_n),
    .start     (start),
    .block_in  (cipher_in),
    .busy      (cipher_busy),
    .done      (cipher_done),
    .block_out (cipher_out),
    .rk_idx    (rk_idx),
    .rk        (rk)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      chain  <= '0;
      blocks <= '0;
    end else begin
      if (start && !cipher_busy && first) blocks <= '0;
      if (cipher_done) begin
        chain <= cipher_out;
        if (!(start && !cipher_busy && first) && blocks != 16'hffff) blocks <= blocks + 16'd1;
      end
    end
  end

  assign busy = cipher_busy;
  assign done = cipher_done;
  assign ct   = chain_now;

endmodule
