// tb_aes_cbc_engine: checks AES-256-CBC encryption.
//
// The testbench supplies the round keys from the reference model. It runs
// the NIST SP 800-38A CBC-AES256 example (four blocks), then random
// multi-block messages against the reference CBC chain, with blocks started
// both after a gap and in the very cycle the previous block completes (the
// chaining bypass). It checks that FIRST restarts the chain on the IV, the
// block counter, and the 15-cycle latency.
module tb_aes_cbc_engine;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0, first = 0, busy, done;
  block_t iv, pt, ct, rk;
  logic [15:0] blocks;
  rk_idx_t rk_idx;
  block_t rks [15];
  key256_t key;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes_cbc_engine dut (.*);
  assign rk = rks[rk_idx];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic set_key(input key256_t k);
    key = k;
    for (int r = 0; r < 15; r++) rks[r] = round_key(k, r);
  endtask

  // encrypt one block; back2back: start in the cycle done is seen
  task automatic blk(input block_t p, input bit f, input block_t exp_ct, input string what);
    int cyc;
    pt = p; first = f; start = 1;
    @(negedge clk); start = 0; pt = rand128(); first = $urandom_range(0, 1);
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    check(cyc == 15, $sformatf("%s: latency %0d", what, cyc));
    check(ct == exp_ct, $sformatf("%s: %h vs %h", what, ct, exp_ct));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    pt = '0;
    set_key(256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4);
    iv = 128'h000102030405060708090a0b0c0d0e0f;
    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);
    // SP 800-38A F.2.5, blocks started after a gap
    blk(128'h6bc1bee22e409f96e93d7e117393172a, 1, 128'hf58c4c04d6e5f1ba779eabfb5f7bfbd6, "CBC 1");
    @(negedge clk); @(negedge clk);
    blk(128'hae2d8a571e03ac9c9eb76fac45af8e51, 0, 128'h9cfc4e967edb808d679f777bc6702c7d, "CBC 2");
    @(negedge clk);
    blk(128'h30c81c46a35ce411e5fbc1191a0a52ef, 0, 128'h39f23369a9d9bacfa530e26304231461, "CBC 3");
    @(negedge clk);
    blk(128'hf69f2445df4f9b17ad2b417be66c3710, 0, 128'hb2eb05e2c39be9fcda6c19078c6a9d1b, "CBC 4");
    @(negedge clk);
    check(blocks == 16'd4, $sformatf("block count %0d, expected 4", blocks));
    // random messages, blocks back to back (start in the done cycle)
    for (int m = 0; m < 10; m++) begin
      block_t prev;
      int nb;
      set_key({rand128(), rand128()});
      iv = rand128();
      prev = iv;
      nb = $urandom_range(1, 6);
      for (int b = 0; b < nb; b++) begin
        block_t p;
        p = rand128();
        prev = cbc_step(key, prev, p);
        blk(p, b == 0, prev, $sformatf("msg %0d block %0d", m, b));
        if (m % 2 == 1) @(negedge clk);
      end
      @(negedge clk);
      check(blocks == 16'(nb), $sformatf("msg %0d: block count %0d, expected %0d", m, blocks, nb));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
