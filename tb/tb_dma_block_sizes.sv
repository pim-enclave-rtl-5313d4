// tb_dma_block_sizes: the DMA access-time workload on one full-size enclave
// bank (64 MB bank, 4 MB local memory, default parameters). For block sizes
// of 512, 1024, 2048, 4096 and 8192 bytes, at sequential and at random bank
// addresses, it moves a block in both directions with and without
// encryption:
//   bank -> local  plain copy and AES-GCM decrypt of a block the host wrote
//                  (data checked word by word through the core bus);
//   local -> bank  plain copy and AES-GCM encrypt (the host reads the
//                  result back and opens it with the reference model).
// Every transfer's busy time is checked against the engine's rate: two
// cycles per 16 bytes plain, three encrypted, plus a fixed start-up that
// must not depend on the size or the address. The access-time ratio of
// encrypted to plain transfers is printed per size.
module tb_dma_block_sizes;
  import pim_pkg::*;
  import gcm_model_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  host_req_t host_i;
  word_rsp_t host_o;
  core_req_t core_i;
  word_rsp_t core_o;
  logic            rom_req, ks_req;
  logic [11:0]     rom_addr;
  logic [1:0]      ks_addr;
  logic [31:0]     ks_pc, rom_rdata, ks_rdata;
  logic dma_busy, dma_done, dma_auth_fail, cmd_pending, host_blocked;

  pim_enclave dut (.*);

  assign rom_rdata = 32'h0;
  assign ks_rdata  = 32'h0;

  int checks = 0, failures = 0;
  task automatic ok(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
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

  task automatic host_wr(input logic [23:0] a, input logic [31:0] d);
    @(negedge clk);
    host_i = '{req: 1'b1, we: 1'b1, region: REG_MEM, addr: a, wdata: d};
    @(negedge clk);
    host_i.req = 1'b0;
  endtask

  task automatic host_rd(input logic [23:0] a, output logic [31:0] d);
    @(negedge clk);
    host_i = '{req: 1'b1, we: 1'b0, region: REG_MEM, addr: a, wdata: 32'h0};
    @(negedge clk);
    host_i.req = 1'b0;
    d = host_o.rdata;
  endtask

  task automatic core_wr(input logic [22:0] a, input logic [31:0] d);
    @(negedge clk);
    core_i = '{req: 1'b1, we: 1'b1, addr: a, wdata: d, pc: 32'h2000};
    @(negedge clk);
    core_i.req = 1'b0;
  endtask

  task automatic core_rd(input logic [22:0] a, output logic [31:0] d);
    @(negedge clk);
    core_i = '{req: 1'b1, we: 1'b0, addr: a, wdata: 32'h0, pc: 32'h2000};
    @(negedge clk);
    core_i.req = 1'b0;
    d = core_o.rdata;
  endtask

  function automatic logic [22:0] reg_a(input logic [7:0] r);
    return {CR_REGS, 13'h0, r};
  endfunction

  // run one transfer and return its busy time
  task automatic dma(input logic [31:0] src, input logic [31:0] dst, input int size,
                     input logic [31:0] cmd, output logic [31:0] st, output int len);
    core_wr(reg_a(R_DMA_SRC), src);
    core_wr(reg_a(R_DMA_DST), dst);
    core_wr(reg_a(R_DMA_SIZE), 32'(size));
    core_wr(reg_a(R_DMA_CMD), cmd);
    do core_rd(reg_a(R_DMA_STATUS), st); while (!st[ST_DONE]);
    @(negedge clk);
    len = busy_len.pop_back();
  endtask

  localparam int SIZES [5] = '{512, 1024, 2048, 4096, 8192};

  logic [127:0] key, pt [], ct [], tg, got, rb;
  logic [95:0]  iv;
  logic [31:0]  st, d, bank_a, bank_b;
  int n, len_p_in, len_d, len_p_out, len_e;
  int plain_fix = -1, dec_fix = -1, enc_fix = -1;

  initial begin
    host_i = '0;
    core_i = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    key = {$urandom, $urandom, $urandom, $urandom};
    for (int i = 0; i < 4; i++) core_wr(reg_a(R_DATA_KEY0 + 8'(i)), key[127-32*i -: 32]);
    for (int pat = 0; pat < 2; pat++) begin
      foreach (SIZES[s]) begin
        n = SIZES[s] / 16;
        // sequential: consecutive 16 KB slots; random: a random row
        if (pat == 0) begin
          bank_a = 32'(s) * 32'h8000;
          bank_b = bank_a + 32'h4000;
        end else begin
          bank_a = ($urandom % 16000) << 12;
          bank_b = bank_a + 32'h4000;
        end
        pt = new[n];
        foreach (pt[i]) pt[i] = {$urandom, $urandom, $urandom, $urandom};
        iv = {$urandom, $urandom, $urandom};
        tg = gcm(key, iv, 0, pt, ct);
        rb = {iv, 32'h0};
        for (int j = 0; j < 4; j++) host_wr(24'((bank_a >> 2) + 32'(j)), rb[127-32*j -: 32]);
        for (int j = 0; j < 4; j++) host_wr(24'((bank_a >> 2) + 32'(4 + j)), tg[127-32*j -: 32]);
        for (int i = 0; i < n; i++)
          for (int j = 0; j < 4; j++) host_wr(24'((bank_a >> 2) + 32'(8 + 4*i + j)), ct[i][127-32*j -: 32]);

        // bank -> local, plain: the raw ciphertext arrives
        dma(bank_a + 32, 32'h0, SIZES[s], 32'(DMA_BANK_TO_LOCAL), st, len_p_in);
        for (int i = 0; i < n; i += 7) begin
          core_rd({CR_LOCAL, 21'(4 * i + 1)}, d);
          ok(d == ct[i][95:64], "plain bank->local word");
        end
        // bank -> local, decrypt
        dma(bank_a, 32'h10_0000, SIZES[s], 32'(DMA_DECRYPT_TRANSFER), st, len_d);
        ok(!st[ST_AUTH_FAIL], "block authenticates");
        for (int i = 0; i < 4 * n; i++) begin
          core_rd({CR_LOCAL, 21'(32'h4_0000 + 32'(i))}, d);
          ok(d == pt[i / 4][127-32*(i%4) -: 32], "decrypted word");
        end
        // local -> bank, plain and encrypted
        dma(32'h10_0000, bank_b, SIZES[s], 32'(DMA_LOCAL_TO_BANK), st, len_p_out);
        host_rd(24'((bank_b >> 2) + 32'(4 * n - 1)), d);
        ok(d == pt[n-1][31:0], "plain local->bank word");
        for (int i = 0; i < 3; i++) core_wr(reg_a(R_COUNTER0 + 8'(i)), 32'(s * 3 + i + pat * 100));
        dma(32'h10_0000, bank_b, SIZES[s], 32'(DMA_ENCRYPT_TRANSFER), st, len_e);
        ct = new[n];
        for (int i = 0; i < n + 2; i++) begin
          for (int j = 0; j < 4; j++) begin
            host_rd(24'((bank_b >> 2) + 32'(4*i + j)), d);
            rb[127-32*j -: 32] = d;
          end
          if (i == 0) iv = rb[127:32];
          else if (i == 1) tg = rb;
          else ct[i-2] = rb;
        end
        got = gcm(key, iv, 1, ct, pt);
        ok(got == tg, $sformatf("encrypted %0d B block opens", SIZES[s]));

        // rates: fixed start-up plus 2 (plain) or 3 (encrypted) cycles per 16 B
        if (plain_fix < 0) begin
          plain_fix = len_p_in - 2 * n;
          dec_fix   = len_d - 3 * n;
          enc_fix   = len_e - 3 * n;
        end
        ok(len_p_in  == 2 * n + plain_fix, $sformatf("plain in %0d cycles", len_p_in));
        ok(len_p_out == 2 * n + plain_fix, $sformatf("plain out %0d cycles", len_p_out));
        ok(len_d     == 3 * n + dec_fix,   $sformatf("decrypt %0d cycles", len_d));
        ok(len_e     == 3 * n + enc_fix,   $sformatf("encrypt %0d cycles", len_e));
        $display("%s %5d B: plain %5d / %5d cycles, decrypt %5d, encrypt %5d, ratio %0.2f",
                 pat == 0 ? "seq" : "rnd", SIZES[s], len_p_in, len_p_out, len_d, len_e,
                 real'(len_d) / real'(len_p_in));
      end
    end
    // busy is high for 2n+1 (plain), 3n+9 (decrypt) and 3n+8 (encrypt) cycles
    ok(plain_fix == 1 && dec_fix == 9 && enc_fix == 8, "fixed start-up cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
