// tb_boot_rom: loads a 64-word image into the shared ROM and reads it from
// all ports at once; each word of the image is i * 0x9E3779B1 + 0x01234567
// (mod 2^32), so the expected values are computed here, not read back.
// Words past the image must read as zero.
module tb_boot_rom;
  localparam int N = 8, D = 128;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req = 0, rvalid;
  logic [6:0]   addr [N];
  logic [31:0]  rdata [N];

  boot_rom #(.N_PORTS(N), .DEPTH(D), .INIT_FILE("tb/boot_rom_test.hex")) dut (.*);

  int checks = 0, failures = 0;
  task automatic ok(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [6:0] as [N];
  initial begin
    foreach (addr[p]) addr[p] = 0;
    for (int t = 0; t < 50; t++) begin
      @(negedge clk);
      for (int p = 0; p < N; p++) begin as[p] = 7'($urandom); addr[p] = as[p]; end
      req = '1;
      @(negedge clk);
      req = '0;
      for (int p = 0; p < N; p++) begin
        logic [31:0] exp;
        exp = (as[p] < 64) ? 32'(32'(as[p]) * 32'h9E3779B1 + 32'h01234567) : 32'h0;
        ok(rvalid[p] && rdata[p] == exp, $sformatf("port %0d word %0d", p, as[p]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
