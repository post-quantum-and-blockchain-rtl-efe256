// tb_aes256_cipher: checks the iterative AES-256 block cipher.
//
// The testbench plays the round-key store: it expands the key with the
// reference model and answers `rk_idx` combinationally. It checks the
// FIPS-197 Appendix C.3 vector, four NIST SP 800-38A ECB-AES256 vectors and
// random blocks under random keys against the reference model, the
// start-to-done latency (15 clock edges), the one-cycle `done` pulse, that a
// `start` while busy is ignored, and back-to-back blocks started in the cycle
// after `done`.
module tb_aes256_cipher;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  block_t block_in, block_out, rk;
  rk_idx_t rk_idx;
  block_t rks [15];
  key256_t key;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes256_cipher dut (.*);
  assign rk = rks[rk_idx];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set_key(input key256_t k);
    key = k;
    for (int r = 0; r < 15; r++) rks[r] = round_key(k, r);
  endtask

  task automatic enc(input block_t pt, input block_t exp_ct, input string what);
    int cyc;
    @(negedge clk); block_in = pt; start = 1;
    @(negedge clk); start = 0; block_in = rand128();
    cyc = 1;
    while (!done) begin
      // a second start while busy must be ignored
      if (cyc == 5) start = 1; else start = 0;
      @(negedge clk); cyc++;
    end
    start = 0;
    check(cyc == 15, $sformatf("%s: latency %0d, expected 15", what, cyc));
    check(block_out == exp_ct, $sformatf("%s: %h vs %h", what, block_out, exp_ct));
    @(negedge clk);
    check(!done, "done is a one-cycle pulse");
    check(block_out == exp_ct, "block_out holds after done");
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    block_in = '0;
    set_key(256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f);
    repeat (3) @(negedge clk); rst_n = 1;
    enc(128'h00112233445566778899aabbccddeeff, 128'h8ea2b7ca516745bfeafc49904b496089, "FIPS-197 C.3");
    set_key(256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4);
    enc(128'h6bc1bee22e409f96e93d7e117393172a, 128'hf3eed1bdb5d2a03c064b5a7e3db181f8, "SP800-38A ECB 1");
    enc(128'hae2d8a571e03ac9c9eb76fac45af8e51, 128'h591ccb10d410ed26dc5ba74a31362870, "SP800-38A ECB 2");
    enc(128'h30c81c46a35ce411e5fbc1191a0a52ef, 128'hb6ed21b99ca6f4f9f153e7b1beafed1d, "SP800-38A ECB 3");
    enc(128'hf69f2445df4f9b17ad2b417be66c3710, 128'h23304b7a39f9f3ff067d8d8f9e24ecc7, "SP800-38A ECB 4");
    for (int n = 0; n < 30; n++) begin
      block_t p;
      set_key({rand128(), rand128()});
      p = rand128();
      enc(p, encrypt(key, p), $sformatf("random %0d", n));
    end
    // back to back: start again in the cycle where done is high
    begin
      block_t p0, p1;
      p0 = rand128(); p1 = rand128();
      @(negedge clk); block_in = p0; start = 1;
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      check(block_out == encrypt(key, p0), "back-to-back block 0");
      block_in = p1; start = 1;
      @(negedge clk); start = 0;
      check(busy, "accepts start in the done cycle");
      while (!done) @(negedge clk);
      check(block_out == encrypt(key, p1), "back-to-back block 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
