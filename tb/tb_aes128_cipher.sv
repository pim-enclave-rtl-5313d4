// tb_aes128_cipher: checks the single-cycle AES-128 cipher against the
// FIPS-197 and SP 800-38A known-answer vectors, then against the reference
// model on random keys and blocks.
module tb_aes128_cipher;
  import gcm_model_pkg::*;

  logic [127:0] key, pt, ct;
  int checks = 0, failures = 0;

  aes128_cipher dut (.key(key), .pt(pt), .ct(ct));

  task automatic check(input logic [127:0] exp, input string what);
    checks++;
    if (ct !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, ct, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // FIPS-197 appendix C.1
    key = 128'h000102030405060708090a0b0c0d0e0f;
    pt  = 128'h00112233445566778899aabbccddeeff;
    #1 check(128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 C.1");
    // FIPS-197 appendix B
    key = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    pt  = 128'h3243f6a8885a308d313198a2e0370734;
    #1 check(128'h3925841d02dc09fbdc118597196a0b32, "FIPS-197 B");
    // SP 800-38A F.1.1 block 1
    pt  = 128'h6bc1bee22e409f96e93d7e117393172a;
    #1 check(128'h3ad77bb40d7a3660a89ecaf32466ef97, "SP800-38A ECB1");
    // the model must agree with the same vectors
    checks++;
    if (aes_enc(128'h000102030405060708090a0b0c0d0e0f,
                128'h00112233445566778899aabbccddeeff) !==
        128'h69c4e0d86a7b0430d8cdb78070b4c55a) begin
      failures++; $display("FAIL reference model");
    end
    for (int i = 0; i < 40; i++) begin
      key = {$urandom, $urandom, $urandom, $urandom};
      pt  = {$urandom, $urandom, $urandom, $urandom};
      #1 check(aes_enc(key, pt), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
