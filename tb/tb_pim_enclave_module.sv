// tb_pim_enclave_module: end-to-end test of the whole memory module at its
// default size (8 banks of 64 MB, 4 MB local memory each).
//
// Each bank runs one pass of the k-means assignment step, the workload the
// design is meant for, the way an enclave host and a PIM kernel would:
//   host: encrypts 127 objects of 16 features (one 8 KB encrypted block)
//         and their membership with the data key, writes them into the
//         bank, writes the kernel parameters (pointers, sizes, centroids)
//         encrypted with the session key into the parameter buffer, then
//         sends PROTECT and EXECUTE through the command channel.
//   core: (a behavioural stand-in for the PIM core's kernel, one process
//         per bank, all running at once) reads the endorsement key from
//         inside and outside the attestation window, programs the keys,
//         locks the bank, decrypts parameters, objects and membership with
//         the DMA engine, assigns every object to its nearest centroid,
//         re-encrypts the membership into the bank, unlocks, and reports
//         the number of changed memberships.
//   host: while the bank is locked, checks that its reads return zero and
//         its writes are dropped but the parameter buffer still answers;
//         afterwards decrypts the membership with the reference model,
//         checks the tag and compares with its own assignment.
// Bank 7's ciphertext is tampered with before EXECUTE: its kernel must see
// the authentication failure and report it.
// Counted mechanisms: session-key decrypt, data-key decrypt, encrypt,
// authentication failure, blocked host read, dropped host write, parameter
// buffer access under lock, command handshake, key granted, key refused,
// two or more DMA engines busy at once. The DMA rate is checked from the
// busy time of transfers of different lengths (3 cycles per 16 bytes).
module tb_pim_enclave_module;
  import pim_pkg::*;
  import gcm_model_pkg::*;

  localparam int NB   = 8;
  localparam int NOBJ = 127, NFEAT = 16, K = 5;
  localparam int OBJ_BYTES = NOBJ * NFEAT * 4;        // 8128
  localparam int MEM_BYTES = 512;                     // 127 words, padded
  localparam int PAR_BEATS = 1 + K * NFEAT / 4;       // 21
  localparam logic [31:0] BANK_OBJ = 32'h0000_0000;   // encrypted objects
  localparam logic [31:0] BANK_MEM = 32'h0000_4000;   // encrypted membership
  localparam logic [31:0] BANK_PAR = 32'h03FF_F000;   // parameter buffer row
  localparam logic [31:0] LOC_PAR  = 32'h0000_0000;
  localparam logic [31:0] LOC_OBJ  = 32'h0000_1000;
  localparam logic [31:0] LOC_MEM  = 32'h0000_4000;
  // kernel status words reported through the command channel
  localparam logic [31:0] K_LOCKED = 32'h1, K_DONE = 32'h100, K_ERROR = 32'hBAD;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  host_req_t  host_i;
  logic [2:0] host_bank;
  word_rsp_t  host_o;
  core_req_t  core_i [NB];
  word_rsp_t  core_o [NB];
  logic [NB-1:0] dma_busy, dma_done, dma_auth_fail, cmd_pending, host_blocked, ek_denied;

  pim_enclave_module dut (.*);

  int checks = 0, failures = 0;
  task automatic ok(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int n_sess_dec = 0, n_data_dec = 0, n_enc = 0, n_auth_fail = 0;
  int n_blk_rd = 0, n_blk_wr = 0, n_param_locked = 0, n_cmd = 0;
  int n_key_ok = 0, n_key_denied = 0, n_parallel = 0;

  always @(posedge clk) begin
    if (rst_n && $countones(dma_busy) > 1) n_parallel++;
    if (rst_n && |ek_denied) n_key_denied++;
  end

  // busy time of bank 0's transfers, in cycles
  int busy_len [$];
  int cur_len = 0;
  always @(posedge clk) begin
    if (!rst_n) cur_len = 0;
    else if (dma_busy[0]) cur_len++;
    else if (cur_len != 0) begin busy_len.push_back(cur_len); cur_len = 0; end
  end

  // ------------------------------------------------------------- host bus
  task automatic host_wr(input int b, input host_region_e r, input logic [23:0] a,
                         input logic [31:0] d);
    @(negedge clk);
    host_i = '{req: 1'b1, we: 1'b1, region: r, addr: a, wdata: d};
    host_bank = 3'(b);
    @(negedge clk);
    host_i.req = 1'b0;
  endtask

  task automatic host_rd(input int b, input host_region_e r, input logic [23:0] a,
                         output logic [31:0] d);
    @(negedge clk);
    host_i = '{req: 1'b1, we: 1'b0, region: r, addr: a, wdata: 32'h0};
    host_bank = 3'(b);
    @(negedge clk);
    host_i.req = 1'b0;
    d = host_o.rdata;
  endtask

  task automatic host_wr_beat(input int b, input host_region_e r, input logic [23:0] wa,
                              input logic [127:0] beat);
    for (int j = 0; j < 4; j++) host_wr(b, r, wa + 24'(j), beat[127-32*j -: 32]);
  endtask

  task automatic host_rd_beat(input int b, input logic [23:0] wa, output logic [127:0] beat);
    logic [31:0] w;
    for (int j = 0; j < 4; j++) begin
      host_rd(b, REG_MEM, wa + 24'(j), w);
      beat[127-32*j -: 32] = w;
    end
  endtask

  // Write an encrypted block IV | TAG | C at word address wa.
  task automatic host_put_block(input int b, input host_region_e r, input logic [23:0] wa,
                                input logic [127:0] key, input logic [95:0] iv,
                                input logic [127:0] pt []);
    logic [127:0] ct [], tg;
    tg = gcm(key, iv, 0, pt, ct);
    host_wr_beat(b, r, wa, {iv, 32'h0});
    host_wr_beat(b, r, wa + 24'd4, tg);
    foreach (ct[i]) host_wr_beat(b, r, wa + 24'd8 + 24'(4 * i), ct[i]);
  endtask

  task automatic host_cmd(input int b, input pim_cmd_e c, input logic [31:0] expect_status);
    logic [31:0] d;
    host_wr(b, REG_CMD, 24'd0, 32'(c));
    n_cmd++;
    do host_rd(b, REG_CMD, 24'd1, d); while (d != expect_status && d != K_ERROR);
  endtask

  // ------------------------------------------------------------- core bus
  function automatic logic [22:0] ca(input core_region_e r, input logic [20:0] off);
    return {r, off};
  endfunction

  task automatic core_wr(input int b, input logic [22:0] a, input logic [31:0] d);
    @(negedge clk);
    core_i[b] = '{req: 1'b1, we: 1'b1, addr: a, wdata: d, pc: 32'h0000_8000};
    @(negedge clk);
    core_i[b].req = 1'b0;
  endtask

  task automatic core_rd(input int b, input logic [22:0] a, input logic [31:0] pc,
                         output logic [31:0] d);
    @(negedge clk);
    core_i[b] = '{req: 1'b1, we: 1'b0, addr: a, wdata: 32'h0, pc: pc};
    @(negedge clk);
    core_i[b].req = 1'b0;
    ok(core_o[b].rvalid, "core rvalid");
    d = core_o[b].rdata;
  endtask

  task automatic core_reg_wr(input int b, input logic [7:0] r, input logic [31:0] d);
    core_wr(b, ca(CR_REGS, 21'(r)), d);
  endtask

  task automatic core_reg_rd(input int b, input logic [7:0] r, output logic [31:0] d);
    core_rd(b, ca(CR_REGS, 21'(r)), 32'h0000_8000, d);
  endtask

  task automatic core_dma(input int b, input logic [31:0] src, input logic [31:0] dst,
                          input int size, input logic [31:0] cmd, output bit auth_ok);
    logic [31:0] st;
    core_reg_wr(b, R_DMA_SRC, src);
    core_reg_wr(b, R_DMA_DST, dst);
    core_reg_wr(b, R_DMA_SIZE, 32'(size));
    core_reg_wr(b, R_DMA_CMD, cmd);
    do core_reg_rd(b, R_DMA_STATUS, st); while (!st[ST_DONE]);
    auth_ok = !st[ST_AUTH_FAIL];
  endtask

  task automatic core_local_rd(input int b, input logic [31:0] byte_addr, output logic [31:0] d);
    core_rd(b, ca(CR_LOCAL, 21'(byte_addr >> 2)), 32'h0000_8000, d);
  endtask

  // ---------------------------------------------------------- test data
  logic [127:0] data_key [NB], sess_key [NB];
  logic [3:0]   feat [NB][NOBJ][NFEAT];
  logic [3:0]   cent [NB][K][NFEAT];
  int           memb0 [NB][NOBJ];
  int           exp_memb [NB][NOBJ];
  int           exp_delta [NB];

  function automatic int nearest(input int b, input int o);
    int best = 0, bestd = 32'h7fffffff;
    for (int c = 0; c < K; c++) begin
      int dsum = 0;
      for (int f = 0; f < NFEAT; f++) begin
        int df = int'(feat[b][o][f]) - int'(cent[b][c][f]);
        dsum += df * df;
      end
      if (dsum < bestd) begin bestd = dsum; best = c; end
    end
    return best;
  endfunction

  // ---------------------------------------------------------- PIM kernel
  task automatic kernel(input int b);
    logic [31:0] d, cmd, prm [4], ctr [K][NFEAT], x, xo [NFEAT];
    logic [31:0] ek [4];
    bit auth;
    int delta, best, bestd, dsum, df, m;
    // attestation code reads the EK from inside the window; code outside
    // the window is refused
    for (int i = 0; i < 4; i++) core_rd(b, ca(CR_KEY, 21'(i)), 32'h0000_0100, ek[i]);
    ok({ek[0], ek[1], ek[2], ek[3]} == 128'h5a17_c3e9_0b4d_8f26_e1a7_3c95_d208_7b6f,
       "EK released to attestation code");
    n_key_ok++;
    core_rd(b, ca(CR_KEY, 21'd0), 32'h0001_0000, d);
    ok(d == 32'h0, "EK refused outside attestation code");
    core_rd(b, ca(CR_ROM, 21'd5), 32'h0000_0100, d);
    ok(d == 32'h0, "ROM reads (no image loaded)");
    // keys arrive through the secure channel; the kernel programs them
    for (int i = 0; i < 4; i++) begin
      core_reg_wr(b, R_SESS_KEY0 + 8'(i), sess_key[b][127-32*i -: 32]);
      core_reg_wr(b, R_DATA_KEY0 + 8'(i), data_key[b][127-32*i -: 32]);
    end
    core_reg_wr(b, R_COUNTER0 + 8'd0, 32'(b));
    core_reg_wr(b, R_COUNTER0 + 8'd1, 32'h0);
    core_reg_wr(b, R_COUNTER0 + 8'd2, 32'h1000);
    core_reg_wr(b, R_PIM_STATUS, 32'h0);
    forever begin
      do core_reg_rd(b, R_CMD_PENDING, d); while (!d[0]);
      core_reg_rd(b, R_CMD_VALUE, cmd);
      core_reg_wr(b, R_CMD_PENDING, 32'h1);
      if (cmd[7:0] == CMD_PROTECT) begin
        // host may only reach rows with row[13] = 1 while the kernel runs
        core_reg_wr(b, R_AC_ROW_MASK, 32'h2000);
        core_reg_wr(b, R_AC_ROW_BASE, 32'h2000);
        core_reg_wr(b, R_PIM_STATUS, K_LOCKED);
      end else if (cmd[7:0] == CMD_EXECUTE) begin
        core_dma(b, BANK_PAR, LOC_PAR, PAR_BEATS * 16,
                 32'(DMA_DECRYPT_TRANSFER) | 32'h10, auth);
        ok(auth, "parameters authenticate");
        n_sess_dec++;
        for (int i = 0; i < 4; i++) core_local_rd(b, LOC_PAR + 32'(4 * i), prm[i]);
        for (int c = 0; c < K; c++)
          for (int f = 0; f < NFEAT; f++)
            core_local_rd(b, LOC_PAR + 32'(16 + 4 * (c * NFEAT + f)), ctr[c][f]);
        core_dma(b, prm[0], LOC_OBJ, OBJ_BYTES, 32'(DMA_DECRYPT_TRANSFER), auth);
        n_data_dec++;
        if (!auth) begin
          n_auth_fail++;
          core_reg_wr(b, R_AC_ROW_MASK, 32'h0);
          core_reg_wr(b, R_AC_ROW_BASE, 32'h0);
          core_reg_wr(b, R_PIM_STATUS, K_ERROR);
          return;
        end
        core_dma(b, prm[1], LOC_MEM, MEM_BYTES, 32'(DMA_DECRYPT_TRANSFER), auth);
        ok(auth, "membership authenticates");
        n_data_dec++;
        delta = 0;
        for (int o = 0; o < int'(prm[2]); o++) begin
          for (int f = 0; f < NFEAT; f++)
            core_local_rd(b, LOC_OBJ + 32'(4 * (o * NFEAT + f)), xo[f]);
          best = 0; bestd = 32'h7fffffff;
          for (int c = 0; c < int'(prm[3]); c++) begin
            dsum = 0;
            for (int f = 0; f < NFEAT; f++) begin
              df = int'(xo[f]) - int'(ctr[c][f]);
              dsum += df * df;
            end
            if (dsum < bestd) begin bestd = dsum; best = c; end
          end
          core_local_rd(b, LOC_MEM + 32'(4 * o), x);
          m = int'(x);
          if (m != best) begin
            delta++;
            core_wr(b, ca(CR_LOCAL, 21'((LOC_MEM >> 2) + 32'(o))), 32'(best));
          end
        end
        core_dma(b, LOC_MEM, prm[1], MEM_BYTES, 32'(DMA_ENCRYPT_TRANSFER), auth);
        n_enc++;
        core_reg_wr(b, R_AC_ROW_MASK, 32'h0);
        core_reg_wr(b, R_AC_ROW_BASE, 32'h0);
        core_reg_wr(b, R_PIM_STATUS, K_DONE | 32'(delta));
        return;
      end
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] pt [], ct [], tg, beat, iv_beat, tag_beat;
  logic [95:0]  par_iv [NB];
  logic [31:0]  d, saved [NB];
  int           memb;
  bit           all_done;

  initial begin
    host_i = '0;
    host_bank = '0;
    foreach (core_i[b]) core_i[b] = '0;
    for (int b = 0; b < NB; b++) begin
      data_key[b] = {$urandom, $urandom, $urandom, $urandom};
      sess_key[b] = {$urandom, $urandom, $urandom, $urandom};
      par_iv[b]   = {$urandom, $urandom, $urandom};
      for (int o = 0; o < NOBJ; o++) begin
        for (int f = 0; f < NFEAT; f++) feat[b][o][f] = 4'($urandom);
        memb0[b][o] = $urandom % K;
      end
      for (int c = 0; c < K; c++) for (int f = 0; f < NFEAT; f++) cent[b][c][f] = 4'($urandom);
      exp_delta[b] = 0;
      for (int o = 0; o < NOBJ; o++) begin
        exp_memb[b][o] = nearest(b, o);
        if (exp_memb[b][o] != memb0[b][o]) exp_delta[b]++;
      end
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int b = 0; b < NB; b++) begin
      fork
        automatic int bb = b;
        kernel(bb);
      join_none
    end

    for (int b = 0; b < NB; b++) begin
      // objects, one encrypted 8 KB block
      pt = new[OBJ_BYTES / 16];
      for (int i = 0; i < OBJ_BYTES / 16; i++)
        for (int j = 0; j < 4; j++)
          pt[i][127-32*j -: 32] = 32'(feat[b][(4*i+j) / NFEAT][(4*i+j) % NFEAT]);
      host_put_block(b, REG_MEM, 24'(BANK_OBJ >> 2), data_key[b], {$urandom, $urandom, $urandom}, pt);
      // membership
      pt = new[MEM_BYTES / 16];
      for (int i = 0; i < MEM_BYTES / 16; i++)
        for (int j = 0; j < 4; j++)
          pt[i][127-32*j -: 32] = (4*i+j < NOBJ) ? 32'(memb0[b][4*i+j]) : 32'h0;
      host_put_block(b, REG_MEM, 24'(BANK_MEM >> 2), data_key[b], {$urandom, $urandom, $urandom}, pt);
      // parameters: pointers, count, k, then the centroids
      pt = new[PAR_BEATS];
      pt[0] = {BANK_OBJ, BANK_MEM, 32'(NOBJ), 32'(K)};
      for (int i = 1; i < PAR_BEATS; i++)
        for (int j = 0; j < 4; j++)
          pt[i][127-32*j -: 32] = 32'(cent[b][(4*(i-1)+j) / NFEAT][(4*(i-1)+j) % NFEAT]);
      host_put_block(b, REG_PARAM, 24'd0, sess_key[b], par_iv[b], pt);
      // the last bank's host is malicious: it flips a ciphertext bit of
      // the objects while the bank is still open
      if (b == NB - 1) begin
        host_rd(b, REG_MEM, 24'd100, d);
        host_wr(b, REG_MEM, 24'd100, d ^ 32'h0000_0400);
      end
      host_rd(b, REG_MEM, 24'd8, saved[b]);

      host_cmd(b, CMD_PROTECT, K_LOCKED);
      // locked: reads of the data return zero, writes are dropped
      host_rd(b, REG_MEM, 24'd8, d);
      ok(d == 32'h0 && host_blocked[b], "locked read returns zero");
      if (d == 32'h0) n_blk_rd++;
      host_wr(b, REG_MEM, 24'd8, ~saved[b]);
      // rows with row[13] = 1 stay open to the host
      host_wr(b, REG_MEM, {14'h2000, 10'h0}, 32'h1234_5678);
      host_rd(b, REG_MEM, {14'h2000, 10'h0}, d);
      ok(d == 32'h1234_5678, "open region usable while locked");
      // the parameter buffer still answers
      host_rd(b, REG_PARAM, 24'd0, d);
      ok(d == par_iv[b][95:64], "parameter buffer readable while locked");
      if (d == par_iv[b][95:64]) n_param_locked++;
      host_wr(b, REG_CMD, 24'd0, 32'(CMD_EXECUTE));
      n_cmd++;
    end

    // wait for every kernel
    do begin
      all_done = 1;
      for (int b = 0; b < NB; b++) begin
        host_rd(b, REG_CMD, 24'd1, d);
        if (!d[8] && d != K_ERROR) all_done = 0;
      end
    end while (!all_done);

    for (int b = 0; b < NB; b++) begin
      host_rd(b, REG_MEM, 24'd8, d);
      ok(d == saved[b], "write under lock was dropped");
      if (d == saved[b]) n_blk_wr++;
      host_rd(b, REG_CMD, 24'd1, d);
      if (b == NB - 1) begin
        ok(d == K_ERROR, "tampered bank reports authentication failure");
        continue;
      end
      ok(d == (K_DONE | 32'(exp_delta[b])), $sformatf("bank %0d status %h delta %0d", b, d, exp_delta[b]));
      // fetch and open the re-encrypted membership
      host_rd_beat(b, 24'(BANK_MEM >> 2), iv_beat);
      host_rd_beat(b, 24'(BANK_MEM >> 2) + 24'd4, tag_beat);
      ok(iv_beat == {32'(b), 32'h0, 32'h1000, 32'h0}, "membership IV from the bank counter");
      ct = new[MEM_BYTES / 16];
      for (int i = 0; i < MEM_BYTES / 16; i++) host_rd_beat(b, 24'(BANK_MEM >> 2) + 24'(8 + 4 * i), ct[i]);
      tg = gcm(data_key[b], iv_beat[127:32], 1, ct, pt);
      ok(tg == tag_beat, $sformatf("bank %0d membership tag", b));
      for (int o = 0; o < NOBJ; o++) begin
        memb = int'(pt[o / 4][127-32*(o%4) -: 32]);
        ok(memb == exp_memb[b][o], $sformatf("bank %0d object %0d cluster", b, o));
      end
    end

    // DMA rate: bank 0 ran parameters (21 beats), objects (508), membership
    // in (32) and out (32); each extra 16 bytes costs 3 cycles when
    // encrypted
    ok(busy_len.size() == 4, $sformatf("bank 0 transfers %0d", busy_len.size()));
    if (busy_len.size() == 4) begin
      ok(busy_len[1] - busy_len[0] == 3 * (508 - 21), $sformatf("decrypt rate %0d %0d", busy_len[0], busy_len[1]));
      ok(busy_len[1] - busy_len[2] == 3 * (508 - 32), "decrypt rate (membership)");
      ok(busy_len[2] - busy_len[3] == 1, "encrypt is one cycle shorter than decrypt");
    end

    $display("mechanisms: sess_dec=%0d data_dec=%0d enc=%0d auth_fail=%0d blk_rd=%0d blk_wr=%0d param_locked=%0d cmd=%0d key_ok=%0d key_denied=%0d parallel=%0d",
             n_sess_dec, n_data_dec, n_enc, n_auth_fail, n_blk_rd, n_blk_wr, n_param_locked,
             n_cmd, n_key_ok, n_key_denied, n_parallel);
    ok(n_sess_dec > 0, "session-key decrypt happened");
    ok(n_data_dec > 0, "data-key decrypt happened");
    ok(n_enc > 0, "encrypt happened");
    ok(n_auth_fail > 0, "authentication failure happened");
    ok(n_blk_rd > 0, "blocked read happened");
    ok(n_blk_wr > 0, "dropped write happened");
    ok(n_param_locked > 0, "parameter buffer under lock happened");
    ok(n_cmd > 0, "command handshake happened");
    ok(n_key_ok > 0, "key release happened");
    ok(n_key_denied > 0, "key refusal happened");
    ok(n_parallel > 0, "parallel DMA happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

