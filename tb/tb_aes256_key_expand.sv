// tb_aes256_key_expand: checks the AES-256 key schedule.
//
// Loads the FIPS-197 Appendix A.3 key and compares round key 14 with the
// words printed there, then loads random keys and compares all 15 round keys
// with the reference model. Also checks the load-to-ready latency (14 clock
// edges) and that `ready` drops while a new key is being expanded.
module tb_aes256_key_expand;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  logic clk = 0, rst_n = 0, load = 0, ready;
  key256_t key;
  rk_idx_t rd_idx;
  block_t  rd_key;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  aes256_key_expand dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load_key(input key256_t k);
    int cyc = 0;
    @(negedge clk); key = k; load = 1;
    @(negedge clk); load = 0;
    check(!ready, "ready low during expansion");
    cyc = 1;
    while (!ready) begin @(negedge clk); cyc++; end
    check(cyc == 14, $sformatf("ready after %0d edges, expected 14", cyc));
  endtask

  task automatic check_all(input key256_t k);
    for (int r = 0; r < 15; r++) begin
      rd_idx = rk_idx_t'(r); #1;
      check(rd_key == round_key(k, r), $sformatf("round key %0d: %h vs %h", r, rd_key, round_key(k, r)));
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    key = '0; rd_idx = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    check(!ready, "ready low after reset");
    // FIPS-197 A.3
    load_key(256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4);
    rd_idx = 4'd14; #1;
    check(rd_key == 128'hfe4890d1_e6188d0b_046df344_706c631e, "FIPS-197 A.3 w[56..59]");
    rd_idx = 4'd2; #1;
    check(rd_key == 128'h9ba35411_8e6925af_a51a8b5f_2067fcde, "FIPS-197 A.3 w[8..11]");
    check_all(key);
    for (int n = 0; n < 20; n++) begin
      load_key({rand128(), rand128()});
      check_all(key);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
