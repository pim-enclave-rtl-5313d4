// tb_aes_dma_engine: drives the AES-capable DMA engine through its register
// interface against two small memories with one cycle of read latency, and
// checks data, the IV|TAG|ciphertext layout in the bank against the
// reference AES-GCM model, tag failure on tampered data, key selection, and
// the cycle count of every transfer (two cycles per plain beat, three per
// encrypted beat).
module tb_aes_dma_engine;
  import pim_pkg::*;
  import gcm_model_pkg::*;

  localparam int BAW = 12, LAW = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           cfg_we = 0;
  logic [7:0]     cfg_addr = 0;
  logic [31:0]    cfg_wdata = 0, cfg_rdata;
  logic           b_req, b_we, l_req, l_we, busy, done, auth_fail;
  logic [BAW-1:0] b_addr;
  logic [LAW-1:0] l_addr;
  logic [127:0]   b_wdata, b_rdata, l_wdata, l_rdata;

  logic [127:0] bmem [2**BAW];
  logic [127:0] lmem [2**LAW];

  always_ff @(posedge clk) begin
    if (b_req) begin
      if (b_we) bmem[b_addr] <= b_wdata; else b_rdata <= bmem[b_addr];
    end
    if (l_req) begin
      if (l_we) lmem[l_addr] <= l_wdata; else l_rdata <= lmem[l_addr];
    end
  end

  aes_dma_engine #(.BANK_AW(BAW), .LOCAL_AW(LAW)) dut (.*);

  int checks = 0, failures = 0;

  task automatic ok(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic set_key(input bit sess, input logic [127:0] k);
    for (int i = 0; i < 4; i++)
      wr((sess ? R_SESS_KEY0 : R_DATA_KEY0) + 8'(i), k[127-32*i -: 32]);
  endtask

  // Start a transfer and return the cycles until busy falls.
  task automatic xfer(input logic [31:0] src, input logic [31:0] dst,
                      input logic [31:0] size, input logic [31:0] cmd,
                      output int cycles);
    wr(R_DMA_SRC, src);
    wr(R_DMA_DST, dst);
    wr(R_DMA_SIZE, size);
    @(negedge clk); cfg_we = 1; cfg_addr = R_DMA_CMD; cfg_wdata = cmd;
    @(negedge clk); cfg_we = 0; cfg_addr = R_DMA_STATUS;
    cycles = 1;
    while (busy) begin @(negedge clk); cycles++; end
    #1 ok(cfg_rdata[ST_DONE] && !cfg_rdata[ST_BUSY], "status done");
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] kd, ks, pt [], ct [], tref;
  logic [95:0]  iv;
  int cyc, n;

  initial begin
    foreach (bmem[i]) bmem[i] = {$urandom, $urandom, $urandom, $urandom};
    foreach (lmem[i]) lmem[i] = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // plain copies, several sizes: 2 cycles per beat
    for (int t = 0; t < 3; t++) begin
      n = 1 + 4 * t;
      xfer(32'h100, 32'h40, 32'(16 * n), 32'(DMA_BANK_TO_LOCAL), cyc);
      ok(cyc == 2 * n + 2, $sformatf("plain bank->local cycles %0d n=%0d", cyc, n));
      for (int i = 0; i < n; i++) ok(lmem[4 + i] == bmem[16 + i], "plain bank->local data");
    end
    xfer(32'h40, 32'h800, 32'h30, 32'(DMA_LOCAL_TO_BANK), cyc);
    ok(cyc == 8, "plain local->bank cycles");
    for (int i = 0; i < 3; i++) ok(bmem[128 + i] == lmem[4 + i], "plain local->bank data");

    // encrypt local -> bank with the data key and the counter as IV
    kd = {$urandom, $urandom, $urandom, $urandom};
    iv = {$urandom, $urandom, $urandom};
    set_key(0, kd);
    wr(R_COUNTER0 + 0, iv[95:64]); wr(R_COUNTER0 + 1, iv[63:32]); wr(R_COUNTER0 + 2, iv[31:0]);
    for (int t = 0; t < 2; t++) begin
      n = 2 + 6 * t;
      pt = new[n];
      for (int i = 0; i < n; i++) begin
        pt[i] = {$urandom, $urandom, $urandom, $urandom};
        lmem[64 + i] = pt[i];
      end
      xfer(32'h400, 32'h2000, 32'(16 * n), 32'(DMA_ENCRYPT_TRANSFER), cyc);
      ok(cyc == 3 * n + 9, $sformatf("encrypt cycles %0d n=%0d", cyc, n));
      tref = gcm(kd, iv + 96'(t), 0, pt, ct);
      ok(bmem[512] == {iv + 96'(t), 32'h0}, "stored IV");
      ok(bmem[513] == tref, "stored tag");
      for (int i = 0; i < n; i++) ok(bmem[514 + i] == ct[i], "stored ciphertext");

      // decrypt it back into another local region
      xfer(32'h2000, 32'h1000, 32'(16 * n), 32'(DMA_DECRYPT_TRANSFER), cyc);
      ok(cyc == 3 * n + 10, $sformatf("decrypt cycles %0d n=%0d", cyc, n));
      #1 ok(!cfg_rdata[ST_AUTH_FAIL], "auth ok");
      for (int i = 0; i < n; i++) ok(lmem[256 + i] == pt[i], "decrypted data");
    end

    // tampered ciphertext: tag check fails
    bmem[515] = bmem[515] ^ 128'h1;
    xfer(32'h2000, 32'h1000, 32'h80, 32'(DMA_DECRYPT_TRANSFER), cyc);
    #1 ok(cfg_rdata[ST_AUTH_FAIL], "auth fail on tampered data");
    ok(auth_fail, "auth_fail output");

    // a parameter block encrypted by the host with the session key
    ks = {$urandom, $urandom, $urandom, $urandom};
    set_key(1, ks);
    iv = {$urandom, $urandom, $urandom};
    pt = new[3];
    foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
    tref = gcm(ks, iv, 0, pt, ct);
    bmem[3000] = {iv, 32'h0};
    bmem[3001] = tref;
    foreach (ct[i]) bmem[3002 + i] = ct[i];
    xfer(32'(3000 * 16), 32'h0, 32'h30, 32'(DMA_DECRYPT_TRANSFER) | 32'h10, cyc);
    #1 ok(!cfg_rdata[ST_AUTH_FAIL], "session-key block authenticates");
    foreach (pt[i]) ok(lmem[i] == pt[i], "session-key plaintext");
    // the same block with the data key must not authenticate
    xfer(32'(3000 * 16), 32'h0, 32'h30, 32'(DMA_DECRYPT_TRANSFER), cyc);
    #1 ok(cfg_rdata[ST_AUTH_FAIL], "wrong key fails");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
