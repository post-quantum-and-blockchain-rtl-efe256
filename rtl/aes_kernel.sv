// aes_kernel: the AES kernel of a trusted FPGA edge node (top level).
//
// In the attestation scheme this kernel serves, the edge node proves to a
// remote verifier which bitstream it is about to run. Software on the
// processing system (PS) hashes the encrypted user bitstream (SHA3-512),
// appends the verifier's nonce, and hands the resulting report to this
// kernel in the programmable logic (PL), which encrypts it with AES-256 in
// CBC mode under K_FPGA, a key built into the device's bitstream. Only a
// party that holds K_FPGA (the verifier) can read the report, and only a
// device carrying the key can have produced it. The key never leaves the PL:
// no register exposes it.
//
// Structure: an AXI4-Lite register slave (the PS/PL link), the key schedule
// with its round-key store (aes256_key_expand), and the CBC engine
// (aes_cbc_engine) around the iterative AES-256 cipher (aes256_cipher).
// The key schedule runs once, automatically, right after reset.
//
// Register map (byte addresses, 32-bit registers; a 128-bit block is four
// words, word 0 = block bits [127:96] = FIPS-197 bytes 0..3, big-endian):
//   0x00 CTRL    W   [0] START  encrypt PT now, [1] FIRST  chain on IV
//                    (new message) instead of on the previous ciphertext;
//                    reads as 0
//   0x04 STATUS  R   [0] BUSY, [1] DONE (set when a block finishes,
//                    cleared by START), [2] KEY_READY, [31:16] blocks
//                    finished since the last FIRST
//   0x10-0x1C IV RW  initialisation vector
//   0x20-0x2C PT RW  next plaintext block
//   0x30-0x3C CT R   last ciphertext block
// Writes to read-only or unmapped addresses, and reads of unmapped ones,
// get SLVERR and change nothing. WSTRB is honoured for IV and PT.
//
// Flow control: the address and data of a write are accepted on their own
// (each channel has a one-entry holding register); the write is performed
// and answered on B once both are there. A write to CTRL while the engine
// is busy, or before the key schedule has finished, is held back (its B
// response is delayed) until the engine can take it, so software may issue
// START back to back without polling. IV and PT may be rewritten while a
// block is being encrypted: the engine samples them in the START cycle.
// One read is served at a time; R answers one cycle after the AR handshake.
//
// Timing: KEY_READY rises on the 14th clock edge after reset is released.
// A START performed on edge E gives the cipher's done on edge E+14, so
// STATUS.DONE is set on edge E+15 and seen by reads taken from edge E+16 on.
// Back to back, one block is encrypted every 15 cycles.
//
// Lint note: rst_n is both the flip-flops' asynchronous reset and the
// `disable iff` condition of the protocol assertions at the end of the file;
// a linter that sees the latter as a synchronous use reports the net as both.
// The assertions generate no logic, so the warning stands.
//
// What follows the paper: AES-256, CBC mode, encryption in the PL, a
// pre-installed key, AXI-4-family access from the PS. This design's own
// choices: AXI4-Lite with this register map, block-at-a-time operation,
// one round per clock, and no padding (software supplies whole blocks).
module aes_kernel
  import aes_pkg::*;
#(
  parameter key256_t K_FPGA = K_FPGA_DEFAULT
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // AXI4-Lite slave
  input  logic [AXIL_ADDR_W-1:0] s_axil_awaddr,
  input  logic                   s_axil_awvalid,
  output logic                   s_axil_awready,
  input  logic [31:0]            s_axil_wdata,
  input  logic [3:0]             s_axil_wstrb,
  input  logic                   s_axil_wvalid,
  output logic                   s_axil_wready,
  output logic [1:0]             s_axil_bresp,
  output logic                   s_axil_bvalid,
  input  logic                   s_axil_bready,
  input  logic [AXIL_ADDR_W-1:0] s_axil_araddr,
  input  logic                   s_axil_arvalid,
  output logic                   s_axil_arready,
  output logic [31:0]            s_axil_rdata,
  output logic [1:0]             s_axil_rresp,
  output logic                   s_axil_rvalid,
  input  logic                   s_axil_rready
);

  // ---------------------------------------------------------------- key
  logic    key_started, key_ready;
  rk_idx_t rk_idx;
  block_t  rk;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) key_started <= 1'b0;
    else        key_started <= 1'b1;
  end

  aes256_key_expand u_key (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (!key_started),
    .key    (K_FPGA),
    .ready  (key_ready),
    .rd_idx (rk_idx),
    .rd_key (rk)
  );

  // ---------------------------------------------------------------- engine
  block_t      iv_q, pt_q, ct;
  logic        eng_start, eng_first, eng_busy, eng_done;
  logic [15:0] blocks;
  logic        done_q;

  aes_cbc_engine u_cbc (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (eng_start),
    .first  (eng_first),
    .iv     (iv_q),
    .pt     (pt_q),
    .busy   (eng_busy),
    .done   (eng_done),
    .ct     (ct),
    .blocks (blocks),
    .rk_idx (rk_idx),
    .rk     (rk)
  );

  // ---------------------------------------------------------------- AXI4-Lite write
  logic                   aw_full, w_full;
  logic [AXIL_ADDR_W-1:0] aw_addr;
  logic [31:0]            w_data;
  logic [3:0]             w_strb;
  logic                   wr_is_ctrl, wr_stall, wr_exec;
  logic [5:0]             wr_word;

  assign s_axil_awready = !aw_full;
  assign s_axil_wready  = !w_full;

  assign wr_word    = aw_addr[AXIL_ADDR_W-1:2];
  assign wr_is_ctrl = (wr_word == REG_CTRL[AXIL_ADDR_W-1:2]);
  assign wr_stall   = wr_is_ctrl && (eng_busy || !key_ready);
  assign wr_exec    = aw_full && w_full && !s_axil_bvalid && !wr_stall;

  assign eng_start  = wr_exec && wr_is_ctrl && w_strb[0] && w_data[0];
  assign eng_first  = w_data[1];

  function automatic word_t merge(input word_t old, input word_t nw, input logic [3:0] strb);
    word_t r;
    for (int b = 0; b < 4; b++) r[8*b +: 8] = strb[b] ? nw[8*b +: 8] : old[8*b +: 8];
    return r;
  endfunction

  // word index within a 4-word block register
  function automatic logic [1:0] widx(input logic [5:0] w);
    return w[1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      aw_full       <= 1'b0;
      w_full        <= 1'b0;
      aw_addr       <= '0;
      w_data        <= '0;
      w_strb        <= '0;
      s_axil_bvalid <= 1'b0;
      s_axil_bresp  <= RESP_OKAY;
      iv_q          <= '0;
      pt_q          <= '0;
      done_q        <= 1'b0;
    end else begin
      if (s_axil_awvalid && s_axil_awready) begin
        aw_full <= 1'b1;
        aw_addr <= s_axil_awaddr;
      end
      if (s_axil_wvalid && s_axil_wready) begin
        w_full <= 1'b1;
        w_data <= s_axil_wdata;
        w_strb <= s_axil_wstrb;
      end
      if (s_axil_bvalid && s_axil_bready) s_axil_bvalid <= 1'b0;

      if (eng_done) done_q <= 1'b1;
      if (eng_start) done_q <= 1'b0;

      if (wr_exec) begin
        aw_full       <= 1'b0;
        w_full        <= 1'b0;
        s_axil_bvalid <= 1'b1;
        s_axil_bresp  <= RESP_OKAY;
        unique case (wr_word[5:2])
          REG_CTRL[7:4]: if (wr_word[1:0] != 2'd0) s_axil_bresp <= RESP_SLVERR; // only CTRL is writable here
          REG_IV0[7:4]: iv_q[127 - 32*widx(wr_word) -: 32] <=
                  merge(iv_q[127 - 32*widx(wr_word) -: 32], w_data, w_strb);
          REG_PT0[7:4]: pt_q[127 - 32*widx(wr_word) -: 32] <=
                  merge(pt_q[127 - 32*widx(wr_word) -: 32], w_data, w_strb);
          default: s_axil_bresp <= RESP_SLVERR;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- AXI4-Lite read
  logic [5:0] rd_word;
  word_t      rd_data;
  axi_resp_e  rd_resp;

  assign s_axil_arready = !s_axil_rvalid;
  assign rd_word        = s_axil_araddr[AXIL_ADDR_W-1:2];

  always_comb begin
    rd_data = '0;
    rd_resp = RESP_OKAY;
    unique case (rd_word[5:2])
      REG_CTRL[7:4]: begin
        if (rd_word == REG_STATUS[7:2])
          rd_data = {blocks, 13'd0, key_ready, done_q, eng_busy};
        else if (rd_word[1:0] != 2'd0)
          rd_resp = RESP_SLVERR;
      end
      REG_IV0[7:4]: rd_data = iv_q[127 - 32*widx(rd_word) -: 32];
      REG_PT0[7:4]: rd_data = pt_q[127 - 32*widx(rd_word) -: 32];
      REG_CT0[7:4]: rd_data = ct[127 - 32*widx(rd_word) -: 32];
      default: rd_resp = RESP_SLVERR;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_axil_rvalid <= 1'b0;
      s_axil_rdata  <= '0;
      s_axil_rresp  <= RESP_OKAY;
    end else if (s_axil_arvalid && s_axil_arready) begin
      s_axil_rvalid <= 1'b1;
      s_axil_rdata  <= rd_data;
      s_axil_rresp  <= rd_resp;
    end else if (s_axil_rready) begin
      s_axil_rvalid <= 1'b0;
    end
  end

  // ---------------------------------------------------------------- protocol rules
  // AXI: a slave holds a response, unchanged, until the master takes it
  a_b_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_bvalid && !s_axil_bready |=> s_axil_bvalid && $stable(s_axil_bresp));
  a_r_hold : assert property (@(posedge clk) disable iff (!rst_n)
    s_axil_rvalid && !s_axil_rready |=> s_axil_rvalid && $stable(s_axil_rdata) && $stable(s_axil_rresp));
  // the engine is only started when it is idle and the key is expanded
  a_start_ok : assert property (@(posedge clk) disable iff (!rst_n)
    eng_start |-> !eng_busy && key_ready);

endmodule
