// tb_aes_gcm_engine: checks the AES-GCM engine against the GCM
// specification's test cases 1-3 and against the reference model on random
// messages in both directions; checks that blocks stream at one per cycle,
// the set-up and final latencies, key selection and the counter advance.
module tb_aes_gcm_engine;
  import pim_pkg::*;
  import gcm_model_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         cfg_we = 0;
  logic [7:0]   cfg_addr = 0;
  logic [31:0]  cfg_wdata = 0, cfg_rdata;
  logic         start = 0, key_sel = 0, use_counter = 0, decrypt = 0, ready;
  logic [95:0]  iv_in = 0, iv_used;
  logic         blk_valid = 0, out_valid, final_req = 0, tag_valid;
  logic [127:0] blk_in = 0, blk_out, tag;

  int checks = 0, failures = 0;

  aes_gcm_engine dut (.*);

  task automatic expect_eq(input logic [127:0] got, input logic [127:0] exp,
                           input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic wcfg(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic set_key(input bit sess, input logic [127:0] k);
    for (int i = 0; i < 4; i++)
      wcfg((sess ? R_SESS_KEY0 : R_DATA_KEY0) + 8'(i), k[127-32*i -: 32]);
  endtask

  // Runs one message; blocks are fed back to back. Returns the tag.
  task automatic run(input bit sess, input bit usectr, input logic [95:0] iv,
                     input bit dec, input logic [127:0] din [],
                     output logic [127:0] dout [], output logic [127:0] t);
    int n = din.size();
    int setup;
    dout = new[n];
    @(negedge clk);
    start = 1; key_sel = sess; use_counter = usectr; iv_in = iv; decrypt = dec;
    @(negedge clk);
    start = 0;
    setup = 0;
    while (!ready) begin @(negedge clk); setup++; end
    checks++;
    if (setup != 2) begin failures++; $display("FAIL setup cycles %0d", setup); end
    for (int i = 0; i < n; i++) begin
      blk_valid = 1; blk_in = din[i];
      @(negedge clk);
      // result registered: visible one cycle after its block
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid block %0d", i); end
      dout[i] = blk_out;
    end
    blk_valid = 0;
    final_req = 1;
    @(negedge clk);
    final_req = 0;
    checks++;
    if (!tag_valid) begin failures++; $display("FAIL tag_valid"); end
    t = tag;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [127:0] din [], dout [], mref [], t, tref;
  logic [127:0] k;
  logic [95:0]  iv;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;

    // GCM spec test case 1: K = 0, IV = 0, empty plaintext
    set_key(0, 128'h0);
    din = new[0];
    run(0, 0, 96'h0, 0, din, dout, t);
    expect_eq(t, 128'h58e2fccefa7e3061367f1d57a4e7455a, "TC1 tag");

    // test case 2: one zero block
    din = new[1]; din[0] = 128'h0;
    run(0, 0, 96'h0, 0, din, dout, t);
    expect_eq(dout[0], 128'h0388dace60b6a392f328c2b971b2fe78, "TC2 C");
    expect_eq(t, 128'hab6e47d42cec13bdf53a67b21257bddf, "TC2 tag");

    // test case 3: four blocks, loaded as the session key
    set_key(1, 128'hfeffe9928665731c6d6a8f9467308308);
    din = new[4];
    din[0] = 128'hd9313225f88406e5a55909c5aff5269a;
    din[1] = 128'h86a7a9531534f7da2e4c303d8a318a72;
    din[2] = 128'h1c3c0c95956809532fcf0e2449a6b525;
    din[3] = 128'hb16aedf5aa0de657ba637b391aafd255;
    run(1, 0, 96'hcafebabefacedbaddecaf888, 0, din, dout, t);
    expect_eq(dout[0], 128'h42831ec2217774244b7221b784d0d49c, "TC3 C0");
    expect_eq(dout[1], 128'he3aa212f2c02a4e035c17e2329aca12e, "TC3 C1");
    expect_eq(dout[2], 128'h21d514b25466931c7d8f6a5aac84aa05, "TC3 C2");
    expect_eq(dout[3], 128'h1ba30b396a0aac973d58e091473f5985, "TC3 C3");
    expect_eq(t, 128'h4d5c2af327cd64a62cf35abd2ba6fab4, "TC3 tag");
    // the model agrees with test case 3
    tref = gcm(128'hfeffe9928665731c6d6a8f9467308308, 96'hcafebabefacedbaddecaf888,
               0, din, mref);
    expect_eq(tref, 128'h4d5c2af327cd64a62cf35abd2ba6fab4, "model TC3 tag");

    // decrypting test case 3's ciphertext gives the plaintext and same tag
    din = dout;
    run(1, 0, 96'hcafebabefacedbaddecaf888, 1, din, dout, t);
    expect_eq(dout[0], 128'hd9313225f88406e5a55909c5aff5269a, "TC3 dec P0");
    expect_eq(dout[3], 128'hb16aedf5aa0de657ba637b391aafd255, "TC3 dec P3");
    expect_eq(t, 128'h4d5c2af327cd64a62cf35abd2ba6fab4, "TC3 dec tag");

    // random messages with the counter register as IV
    k = {$urandom, $urandom, $urandom, $urandom};
    set_key(0, k);
    iv = {$urandom, $urandom, $urandom};
    wcfg(R_COUNTER0 + 0, iv[95:64]);
    wcfg(R_COUNTER0 + 1, iv[63:32]);
    wcfg(R_COUNTER0 + 2, iv[31:0]);
    for (int m = 0; m < 6; m++) begin
      int n = 1 + ($urandom % 9);
      bit dec = m[0];
      din = new[n];
      foreach (din[i]) din[i] = {$urandom, $urandom, $urandom, $urandom};
      run(0, 1, 96'h0, dec, din, dout, t);
      expect_eq({32'h0, iv_used}, {32'h0, iv + 96'(m)}, "iv from counter");
      tref = gcm(k, iv + 96'(m), dec, din, mref);
      foreach (din[i]) expect_eq(dout[i], mref[i], "random block");
      expect_eq(t, tref, "random tag");
    end
    // counter advanced once per message; keys read back as zero
    @(negedge clk); cfg_addr = R_COUNTER0 + 2;
    #1 expect_eq({96'h0, cfg_rdata}, {96'h0, 32'(iv + 96'd6)}, "counter advance");
    cfg_addr = R_DATA_KEY0;
    #1 expect_eq({96'h0, cfg_rdata}, 128'h0, "key not readable");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
