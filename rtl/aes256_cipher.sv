// aes256_cipher: iterative AES-256 encryption of one 128-bit block.
//
// The datapath holds the 128-bit state in a register and applies one full
// AES round (SubBytes, ShiftRows, MixColumns, AddRoundKey) per clock; the
// fourteenth round skips MixColumns, as FIPS-197 prescribes. The initial
// AddRoundKey is folded into the cycle that accepts the block. Round keys
// come from an external round-key store through `rk_idx` / `rk` (a
// combinational read), so the cipher holds no key material itself.
//
// Interface: `start` is accepted when `busy` is low and captures `block_in`.
// `done` pulses for one cycle when `block_out` holds the ciphertext;
// `block_out` then stays valid until the next `start`.
// Timing: the edge that accepts `start` adds the whitening key, the next 14
// edges compute the rounds, and `done` rises with the 14th, i.e. 15 cycles
// after the cycle in which `start` is presented. A new block may be started
// in the `done` cycle itself, giving one block every 15 cycles.
//
// The paper fixes the algorithm (AES-256, encryption in the FPGA); one round
// per clock is this design's choice.
module aes256_cipher
  import aes_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    start,
  input  block_t  block_in,
  output logic    busy,
  output logic    done,
  output block_t  block_out,
  output rk_idx_t rk_idx,
  input  block_t  rk
);

  block_t  state;
  rk_idx_t round;

  // round key 0 while idle (whitening), else the round being computed
  assign rk_idx    = busy ? round : '0;
  assign block_out = state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '0;
      round <= '0;
      busy  <= 1'b0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          state <= block_in ^ rk;
          round <= 4'd1;
          busy  <= 1'b1;
        end
      end else begin
        state <= enc_round(state, rk, round == rk_idx_t'(NR));
        if (round == rk_idx_t'(NR)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          round <= round + 4'd1;
        end
      end
    end
  end

endmodule
