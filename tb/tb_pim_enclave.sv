// tb_pim_enclave: self-checking test of one enclave bank (pim_enclave) at a
// reduced size (64 rows of 4 KB, 4 KB local memory) so every path can be
// exercised quickly. The shared ROM and key storage are stand-in models
// with a one-cycle read, like the real ones.
//
// Checked: host word reads and writes with their one-cycle response; the
// parameter buffer is the bank's last row and stays open under lock; the
// command channel in both directions; access-control programming, readback,
// blocked reads (zero), dropped writes and the open window; session-key
// decryption from the parameter buffer into local memory; data-key
// encryption from local memory into the bank, opened by the reference
// model; authentication failure on a corrupted block; the DMA rate of three
// cycles per encrypted 16 bytes; the ROM and key-storage pass-through with
// the core's PC.
module tb_pim_enclave;
  import pim_pkg::*;
  import gcm_model_pkg::*;

  localparam int RW = 6, CW = 10, LAW = 8, RAW = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  host_req_t host_i;
  word_rsp_t host_o;
  core_req_t core_i;
  word_rsp_t core_o;
  logic            rom_req, ks_req;
  logic [RAW-1:0]  rom_addr;
  logic [1:0]      ks_addr;
  logic [31:0]     ks_pc, rom_rdata, ks_rdata;
  logic dma_busy, dma_done, dma_auth_fail, cmd_pending, host_blocked;

  pim_enclave #(.BANK_ROW_W(RW), .BANK_COL_W(CW), .LOCAL_AW(LAW), .ROM_AW(RAW)) dut (.*);

  // stand-ins for the shared ROM and key storage
  localparam logic [127:0] EKEY = 128'h0f1e2d3c_4b5a6978_8796a5b4_c3d2e1f0;
  always_ff @(posedge clk) begin
    if (rom_req) rom_rdata <= {20'hA0000, rom_addr};
    if (ks_req)  ks_rdata  <= (ks_pc < 32'h1000) ? EKEY[127 - 32*ks_addr -: 32] : 32'h0;
  end

  int checks = 0, failures = 0;
  task automatic ok(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int busy_len [$];
  int cur_len = 0;
  always @(posedge clk) begin
    if (!rst_n) cur_len = 0;
    else if (dma_busy) cur_len++;
    else if (cur_len != 0) begin busy_len.push_back(cur_len); cur_len = 0; end
  end

  task automatic host_wr(input host_region_e r, input logic [23:0] a, input logic [31:0] d);
    @(negedge clk);
    host_i = '{req: 1'b1, we: 1'b1, region: r, addr: a, wdata: d};
    @(negedge clk);
    host_i.req = 1'b0;
  endtask

  task automatic host_rd(input host_region_e r, input logic [23:0] a, output logic [31:0] d);
    @(negedge clk);
    host_i = '{req: 1'b1, we: 1'b0, region: r, addr: a, wdata: 32'h0};
    @(negedge clk);
    host_i.req = 1'b0;
    ok(host_o.rvalid, "host rvalid one cycle after the request");
    d = host_o.rdata;
  endtask

  task automatic core_wr(input logic [22:0] a, input logic [31:0] d);
    @(negedge clk);
    core_i = '{req: 1'b1, we: 1'b1, addr: a, wdata: d, pc: 32'h2000};
    @(negedge clk);
    core_i.req = 1'b0;
  endtask

  task automatic core_rd(input logic [22:0] a, input logic [31:0] pc, output logic [31:0] d);
    @(negedge clk);
    core_i = '{req: 1'b1, we: 1'b0, addr: a, wdata: 32'h0, pc: pc};
    @(negedge clk);
    core_i.req = 1'b0;
    ok(core_o.rvalid, "core rvalid one cycle after the request");
    d = core_o.rdata;
  endtask

  function automatic logic [22:0] ca(input core_region_e r, input logic [20:0] off);
    return {r, off};
  endfunction

  task automatic dma(input logic [31:0] src, input logic [31:0] dst, input int size,
                     input logic [31:0] cmd, output logic [31:0] st);
    core_wr(ca(CR_REGS, 21'(R_DMA_SRC)), src);
    core_wr(ca(CR_REGS, 21'(R_DMA_DST)), dst);
    core_wr(ca(CR_REGS, 21'(R_DMA_SIZE)), 32'(size));
    core_wr(ca(CR_REGS, 21'(R_DMA_CMD)), cmd);
    do core_rd(ca(CR_REGS, 21'(R_DMA_STATUS)), 32'h2000, st); while (!st[ST_DONE]);
  endtask

  task automatic put_block(input host_region_e r, input logic [23:0] wa, input logic [127:0] key,
                           input logic [95:0] iv, input logic [127:0] pt []);
    logic [127:0] ct [], tg;
    tg = gcm(key, iv, 0, pt, ct);
    for (int j = 0; j < 4; j++) host_wr(r, wa + 24'(j), iv_beat_w(iv, j));
    for (int j = 0; j < 4; j++) host_wr(r, wa + 24'(4 + j), tg[127-32*j -: 32]);
    foreach (ct[i]) for (int j = 0; j < 4; j++) host_wr(r, wa + 24'(8 + 4*i + j), ct[i][127-32*j -: 32]);
  endtask

  function automatic logic [31:0] iv_beat_w(input logic [95:0] iv, input int j);
    logic [127:0] b;
    b = {iv, 32'h0};
    return b[127-32*j -: 32];
  endfunction

  logic [31:0]  d, st, model [int];
  logic [23:0]  a;
  logic [127:0] skey, dkey, pt [], ct [], tg, rb, got;
  logic [95:0]  iv;

  initial begin
    host_i = '0;
    core_i = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // plain host accesses
    for (int i = 0; i < 60; i++) begin
      a = 24'($urandom) & 24'h00_FFFF;
      if (a[23:10] == 14'h3F) a[15] = 1'b0;      // keep off the buffer row
      d = $urandom;
      host_wr(REG_MEM, a, d);
      model[int'(a)] = d;
    end
    foreach (model[k]) begin
      host_rd(REG_MEM, 24'(k), d);
      ok(d == model[k], $sformatf("host word %h", k));
    end

    // parameter buffer is the last row of the bank
    host_wr(REG_PARAM, 24'd5, 32'hCAFE_0005);
    host_rd(REG_MEM, {8'h0, 6'h3F, 10'd5}, d);
    ok(d == 32'hCAFE_0005, "parameter buffer maps to the last row");

    // command channel
    ok(!cmd_pending, "no command pending after reset");
    host_wr(REG_CMD, 24'd0, 32'(CMD_PROTECT));
    ok(cmd_pending, "command pending after host write");
    host_rd(REG_CMD, 24'd0, d);
    ok(d == 32'h1, "host sees the pending flag");
    core_rd(ca(CR_REGS, 21'(R_CMD_VALUE)), 32'h2000, d);
    ok(d == 32'(CMD_PROTECT), "core reads the command");
    core_wr(ca(CR_REGS, 21'(R_CMD_PENDING)), 32'h1);
    ok(!cmd_pending, "acknowledge clears pending");
    core_wr(ca(CR_REGS, 21'(R_PIM_STATUS)), 32'h77);
    host_rd(REG_CMD, 24'd1, d);
    ok(d == 32'h77, "host reads the kernel status");

    // lock rows 0..31; rows 32..63 stay open
    core_wr(ca(CR_REGS, 21'(R_AC_ROW_MASK)), 32'h20);
    core_wr(ca(CR_REGS, 21'(R_AC_ROW_BASE)), 32'h20);
    core_rd(ca(CR_REGS, 21'(R_AC_ROW_MASK)), 32'h2000, d);
    ok(d == 32'h20, "row mask reads back");
    core_rd(ca(CR_REGS, 21'(R_AC_ROW_BASE)), 32'h2000, d);
    ok(d == 32'h20, "row base reads back");
    foreach (model[k]) begin
      host_rd(REG_MEM, 24'(k), d);
      if (k[15]) ok(d == model[k], "open rows readable");
      else begin
        ok(d == 32'h0, "locked rows read as zero");
        ok(host_blocked, "blocked flag");
      end
      host_wr(REG_MEM, 24'(k), ~model[k]);
      if (k[15]) model[k] = ~model[k];
    end
    host_rd(REG_PARAM, 24'd5, d);
    ok(d == 32'hCAFE_0005, "parameter buffer open under lock");

    // session-key decryption from the parameter buffer
    skey = {$urandom, $urandom, $urandom, $urandom};
    dkey = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 4; i++) begin
      core_wr(ca(CR_REGS, 21'(R_SESS_KEY0 + i)), skey[127-32*i -: 32]);
      core_wr(ca(CR_REGS, 21'(R_DATA_KEY0 + i)), dkey[127-32*i -: 32]);
    end
    for (int n = 4; n <= 8; n += 4) begin
      pt = new[n];
      foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
      iv = {$urandom, $urandom, $urandom};
      put_block(REG_PARAM, 24'd0, skey, iv, pt);
      dma(32'({6'h3F, 10'd0, 2'b0}), 32'h0, 16 * n, 32'(DMA_DECRYPT_TRANSFER) | 32'h10, st);
      ok(!st[ST_AUTH_FAIL], "parameter block authenticates");
      for (int i = 0; i < 4 * n; i++) begin
        core_rd(ca(CR_LOCAL, 21'(i)), 32'h2000, d);
        ok(d == pt[i / 4][127-32*(i%4) -: 32], "decrypted parameter word");
      end
    end
    ok(busy_len.size() == 2 && busy_len[1] - busy_len[0] == 12, "3 cycles per encrypted beat");
    // the same block under the data key fails
    dma(32'({6'h3F, 10'd0, 2'b0}), 32'h0, 16 * 8, 32'(DMA_DECRYPT_TRANSFER), st);
    ok(st[ST_AUTH_FAIL], "wrong key is detected");

    // unlock and encrypt local memory into row 2 with the data key
    core_wr(ca(CR_REGS, 21'(R_AC_ROW_MASK)), 32'h0);
    core_wr(ca(CR_REGS, 21'(R_AC_ROW_BASE)), 32'h0);
    for (int i = 0; i < 3; i++) core_wr(ca(CR_REGS, 21'(R_COUNTER0 + i)), 32'(i + 9));
    dma(32'h0, 32'h0000_2000, 16 * 8, 32'(DMA_ENCRYPT_TRANSFER), st);
    ok(!st[ST_AUTH_FAIL], "encrypt reports no failure");
    ct = new[8];
    for (int i = 0; i < 10; i++) begin
      for (int j = 0; j < 4; j++) begin
        host_rd(REG_MEM, 24'(32'h800 + 32'(4*i + j)), d);
        rb[127-32*j -: 32] = d;
      end
      if (i == 0) iv = rb[127:32];
      else if (i == 1) tg = rb;
      else ct[i-2] = rb;
    end
    ok(iv == {32'd9, 32'd10, 32'd11}, "IV taken from the counter register");
    got = gcm(dkey, iv, 1, ct, pt);
    ok(got == tg, "bank ciphertext opens with the data key");
    core_rd(ca(CR_REGS, 21'(R_COUNTER0 + 2)), 32'h2000, d);
    ok(d == 32'd12, "counter advanced after use");

    // ROM and key storage pass-through
    core_rd(ca(CR_ROM, 21'h123), 32'h2000, d);
    ok(d == 32'hA000_0123, "ROM read");
    for (int i = 0; i < 4; i++) begin
      core_rd(ca(CR_KEY, 21'(i)), 32'h0100, d);
      ok(d == EKEY[127-32*i -: 32], "key read with attestation PC");
    end
    core_rd(ca(CR_KEY, 21'd0), 32'h8000, d);
    ok(d == 32'h0, "key refused for other PCs");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
