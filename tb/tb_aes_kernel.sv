// tb_aes_kernel: end-to-end test of the AES kernel through its AXI4-Lite port.
//
// The testbench is the processing-system software of an edge node. After
// reset it runs 100 attestation requests: for each it draws a fresh 128-bit
// verifier nonce N2 and a 512-bit bitstream checksum C3, and has the kernel
// encrypt the report A2 = N2 || C3 (five 128-bit blocks) in CBC mode under
// the built-in key, with a fresh IV. Every ciphertext block is compared with
// the reference model; the kernel is used at its default parameters.
//
// Two software styles alternate. "Polling" writes PT, writes START, polls
// STATUS.DONE and reads CT. "Streaming" writes the next PT while the engine
// is still busy and issues the next START at once, relying on the kernel to
// hold the START write back until the engine is free, then reads the
// previous block's CT.
//
// Mechanisms counted (each must happen at least once): START held back
// while the key schedule runs, START held back while the engine is busy, PT
// written while busy, FIRST restarting the chain on the IV, a block chained on
// the previous ciphertext, SLVERR on writes and on reads, a partial (WSTRB)
// write, W before AW and AW before W, B and R held by the master. Also
// checked: KEY_READY 14 cycles after reset, 15 cycles from START to DONE,
// the STATUS block counter, register read-back.
module tb_aes_kernel;
  import aes_pkg::*;
  import aes_ref_pkg::*;

  localparam int N_REQUESTS = 100;
  localparam int N2_BLOCKS  = 1;   // 128-bit nonce
  localparam int C3_BLOCKS  = 4;   // SHA3-512 digest

  logic clk = 0, rst_n = 0;
  logic [7:0]  awaddr = '0, araddr = '0;
  logic        awvalid = 0, awready, wvalid = 0, wready, bvalid, bready = 0;
  logic        arvalid = 0, arready, rvalid, rready = 0;
  logic [31:0] wdata = '0, rdata;
  logic [3:0]  wstrb = '0;
  logic [1:0]  bresp, rresp;

  int checks = 0, failures = 0;
  int n_key_stall = 0, n_busy_stall = 0, n_pt_while_busy = 0, n_first = 0, n_chained = 0;
  int n_wr_slverr = 0, n_rd_slverr = 0, n_strb = 0, n_w_first = 0, n_aw_first = 0;
  int n_b_held = 0, n_r_held = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  aes_kernel dut (
    .clk(clk), .rst_n(rst_n),
    .s_axil_awaddr(awaddr), .s_axil_awvalid(awvalid), .s_axil_awready(awready),
    .s_axil_wdata(wdata), .s_axil_wstrb(wstrb), .s_axil_wvalid(wvalid), .s_axil_wready(wready),
    .s_axil_bresp(bresp), .s_axil_bvalid(bvalid), .s_axil_bready(bready),
    .s_axil_araddr(araddr), .s_axil_arvalid(arvalid), .s_axil_arready(arready),
    .s_axil_rdata(rdata), .s_axil_rresp(rresp), .s_axil_rvalid(rvalid), .s_axil_rready(rready)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // ------------------------------------------------------------ timing record
  // `cyc` counts rising edges. The master notes the edge on which a write's
  // address and data were both taken (wr_hs_edge), the edge that raised
  // BVALID (b_edge) and the edge of each read's AR handshake (ar_edge).
  int wr_hs_edge = 0, b_edge = 0, ar_edge = 0;
  int start_edge = 0;         // edge on which the last START was performed
  localparam int DONE_VIS = 16;   // STATUS.DONE visible to reads taken >= START edge + 16

  // ------------------------------------------------------------ AXI4-Lite master
  // order: 0 together, 1 AW first, 2 W first; hold: cycles the master keeps B low
  task automatic axi_write(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s,
                           output logic [1:0] resp, input int order = 0, input int hold = 0);
    int aw_e, w_e;
    bit seen = 0;
    fork
      begin
        if (order == 2) repeat (3) @(negedge clk);
        awaddr = a; awvalid = 1;
        forever begin
          automatic logic r = awready;
          @(negedge clk);
          if (r) break;
        end
        awvalid = 0;
        aw_e = cyc;
      end
      begin
        if (order == 1) repeat (3) @(negedge clk);
        wdata = d; wstrb = s; wvalid = 1;
        forever begin
          automatic logic r = wready;
          @(negedge clk);
          if (r) break;
        end
        wvalid = 0;
        w_e = cyc;
      end
    join
    wr_hs_edge = (aw_e > w_e) ? aw_e : w_e;
    if (order == 1) n_aw_first++;
    if (order == 2) n_w_first++;
    begin
      int h = 0;
      while (!(bvalid && h >= hold)) begin
        if (bvalid && !seen) begin seen = 1; b_edge = cyc; end
        if (bvalid) h++;
        @(negedge clk);
      end
      if (!seen) b_edge = cyc;
      if (hold > 0) n_b_held++;
      bready = 1; resp = bresp;
      @(negedge clk);
      bready = 0;
    end
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d, output logic [1:0] resp,
                          input int hold = 0);
    araddr = a; arvalid = 1;
    forever begin
      automatic logic r = arready;
      @(negedge clk);
      if (r) break;
    end
    arvalid = 0;
    ar_edge = cyc;
    begin
      int h = 0;
      while (!(rvalid && h >= hold)) begin
        if (rvalid) h++;
        @(negedge clk);
      end
      if (hold > 0) n_r_held++;
      rready = 1; d = rdata; resp = rresp;
      @(negedge clk);
      rready = 0;
    end
  endtask

  // fast write: AW and W only; BREADY is held high and the B responses are
  // counted by the monitor below
  int fast_issued = 0, fast_done = 0;
  bit fast_mode = 0;
  task automatic wr_fast(input logic [7:0] a, input logic [31:0] d);
    awaddr = a; awvalid = 1; wdata = d; wstrb = 4'hf; wvalid = 1;
    forever begin
      automatic logic r = awready && wready;
      @(negedge clk);
      if (r) break;
    end
    awvalid = 0; wvalid = 0;
    fast_issued++;
  endtask
  always @(negedge clk) if (fast_mode && bvalid && bready) begin
    fast_done++;
    check(bresp == RESP_OKAY, "fast write resp");
  end

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    logic [1:0] r;
    axi_write(a, d, 4'hf, r, $urandom_range(0, 2), $urandom_range(0, 1) * $urandom_range(1, 3));
    check(r == RESP_OKAY, $sformatf("write %h: resp %0d", a, r));
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d);
    logic [1:0] r;
    axi_read(a, d, r, $urandom_range(0, 1) * $urandom_range(1, 3));
    check(r == RESP_OKAY, $sformatf("read %h: resp %0d", a, r));
  endtask

  task automatic wr_block(input logic [7:0] base, input block_t b);
    for (int i = 0; i < 4; i++) wr(base + 8'(4*i), b[127 - 32*i -: 32]);
  endtask

  task automatic rd_block(input logic [7:0] base, output block_t b);
    for (int i = 0; i < 4; i++) begin
      logic [31:0] d;
      rd(base + 8'(4*i), d);
      b[127 - 32*i -: 32] = d;
    end
  endtask

  // a write is performed on the edge after both halves are taken, unless
  // the kernel holds it back; B rises on the edge that performs it
  task automatic note_start(input bit key_wait);
    start_edge = b_edge;
    if (b_edge - wr_hs_edge > 1) begin
      if (key_wait) n_key_stall++; else n_busy_stall++;
    end
  endtask

  task automatic start(input bit first);
    wr(REG_CTRL, {30'd0, first, 1'b1});
    note_start(0);
    if (first) n_first++; else n_chained++;
  endtask

  // poll STATUS until DONE; every read must show DONE exactly when it was
  // taken at least DONE_VIS edges after the START was performed
  task automatic wait_done();
    logic [31:0] st;
    do begin
      rd(REG_STATUS, st);
      check(st[1] == (ar_edge - start_edge >= DONE_VIS),
            $sformatf("STATUS read %0d edges after START shows DONE=%0d", ar_edge - start_edge, st[1]));
    end while (!st[1]);
  endtask

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ test
  initial begin
    logic [31:0] st, d;
    logic [1:0]  r;
    block_t      ct, exp_ct, prev;
    key256_t     key;
    int          t_rst;
    key = K_FPGA_DEFAULT;

    repeat (3) @(negedge clk);
    rst_n = 1; t_rst = cyc;
    // START before the key schedule has finished: held back, then performed
    wr(REG_CTRL, 32'h3);
    // key schedule: KEY_READY on edge t_rst+14, so the held START is
    // performed on edge t_rst+15
    check(b_edge - t_rst == 15, $sformatf("START after reset performed on edge %0d, expected 15", b_edge - t_rst));
    note_start(1);
    n_first++;
    wait_done();
    rd_block(REG_CT0, ct);
    check(ct == encrypt(key, '0), "first block (zero PT, zero IV) right after reset");
    rd(REG_STATUS, st);
    check(st[2], "KEY_READY");

    // register read-back, WSTRB
    wr_block(REG_IV0, 128'h00112233_44556677_8899aabb_ccddeeff);
    axi_write(REG_IV0 + 8'd4, 32'hA1B2C3D4, 4'b0101, r);
    n_strb++;
    check(r == RESP_OKAY, "partial write resp");
    rd(REG_IV0 + 8'd4, d);
    check(d == 32'h44B266D4, $sformatf("WSTRB merge: %h", d));

    // error responses
    axi_read(REG_CT0, d, r); ct[127:96] = d;
    begin
      logic [7:0] bad_w [5] = '{REG_STATUS, REG_CT0, 8'h08, 8'h40, 8'hfc};
      logic [7:0] bad_r [3] = '{8'h08, 8'h40, 8'hfc};
      foreach (bad_w[i]) begin
        axi_write(bad_w[i], 32'hdeadbeef, 4'hf, r);
        check(r == RESP_SLVERR, $sformatf("write %h must be SLVERR", bad_w[i]));
        if (r == RESP_SLVERR) n_wr_slverr++;
      end
      foreach (bad_r[i]) begin
        axi_read(bad_r[i], d, r);
        check(r == RESP_SLVERR, $sformatf("read %h must be SLVERR", bad_r[i]));
        if (r == RESP_SLVERR) n_rd_slverr++;
      end
      axi_read(REG_CT0, d, r);
      check(d == ct[127:96], "write to CT changed nothing");
    end

    // ---------------- attestation requests: Enc_KFPGA{N2 || C3}
    for (int q = 0; q < N_REQUESTS; q++) begin
      block_t a2 [N2_BLOCKS + C3_BLOCKS];
      block_t iv;
      bit     streaming;
      streaming = (q % 2 == 1);
      iv = rand128();
      a2[0] = rand128();                                   // N2
      for (int i = 0; i < C3_BLOCKS; i++) a2[N2_BLOCKS + i] = rand128();   // C3
      wr_block(REG_IV0, iv);
      prev = iv;
      if (!streaming) begin
        for (int b = 0; b < N2_BLOCKS + C3_BLOCKS; b++) begin
          wr_block(REG_PT0, a2[b]);
          start(b == 0);
          wait_done();
          rd_block(REG_CT0, ct);
          exp_ct = cbc_step(key, prev, a2[b]);
          check(ct == exp_ct, $sformatf("req %0d block %0d: %h vs %h", q, b, ct, exp_ct));
          prev = exp_ct;
        end
      end else begin
        wr_block(REG_PT0, a2[0]);
        start(1);
        for (int b = 1; b < N2_BLOCKS + C3_BLOCKS; b++) begin
          fast_mode = 1; bready = 1;
          for (int i = 0; i < 4; i++) wr_fast(REG_PT0 + 8'(4*i), a2[b][127 - 32*i -: 32]);
          while (fast_done != fast_issued) @(negedge clk);
          fast_mode = 0; bready = 0;
          if (cyc - start_edge < DONE_VIS - 1) n_pt_while_busy++;
          // no polling: this START is held back until block b-1 is done
          begin
            logic [1:0] rr;
            axi_write(REG_CTRL, 32'h1, 4'hf, rr);
            check(rr == RESP_OKAY, "streaming START resp");
            note_start(0);
            n_chained++;
          end
          // block b-1's ciphertext stays readable while block b runs
          for (int i = 0; i < 4; i++) begin
            axi_read(REG_CT0 + 8'(4*i), d, r);
            ct[127 - 32*i -: 32] = d;
          end
          exp_ct = cbc_step(key, prev, a2[b-1]);
          check(ct == exp_ct, $sformatf("req %0d block %0d (stream): %h vs %h", q, b-1, ct, exp_ct));
          prev = exp_ct;
        end
        wait_done();
        rd_block(REG_CT0, ct);
        exp_ct = cbc_step(key, prev, a2[N2_BLOCKS + C3_BLOCKS - 1]);
        check(ct == exp_ct, $sformatf("req %0d last block (stream)", q));
      end
      rd(REG_STATUS, st);
      check(st[31:16] == 16'(N2_BLOCKS + C3_BLOCKS), $sformatf("req %0d block count %0d", q, st[31:16]));
      check(!st[0] && st[1] && st[2], $sformatf("req %0d status %h", q, st));
    end

    $display("mechanisms: key_stall=%0d busy_stall=%0d pt_while_busy=%0d first=%0d chained=%0d",
             n_key_stall, n_busy_stall, n_pt_while_busy, n_first, n_chained);
    $display("            wr_slverr=%0d rd_slverr=%0d strb=%0d aw_first=%0d w_first=%0d b_held=%0d r_held=%0d",
             n_wr_slverr, n_rd_slverr, n_strb, n_aw_first, n_w_first, n_b_held, n_r_held);
    check(n_key_stall > 0, "START held back for the key schedule");
    check(n_busy_stall > 0, "START held back while busy");
    check(n_pt_while_busy > 0, "PT written while busy");
    check(n_first > 0, "chain started on IV");
    check(n_chained > 0, "chain on previous ciphertext");
    check(n_wr_slverr > 0 && n_rd_slverr > 0, "SLVERR on write and read");
    check(n_strb > 0, "partial write");
    check(n_aw_first > 0 && n_w_first > 0, "AW/W in both orders");
    check(n_b_held > 0 && n_r_held > 0, "B and R held by master");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
