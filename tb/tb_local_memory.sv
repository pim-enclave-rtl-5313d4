// tb_local_memory: checks that the core word port and the DMA beat port of
// the 4 MB local memory see the same storage in the documented word order,
// with one cycle of read latency, and that the DMA port wins a collision.
module tb_local_memory;
  logic clk = 0;
  always #5 clk = ~clk;

  logic         c_req = 0, c_we = 0, c_rvalid, d_req = 0, d_we = 0, d_rvalid;
  logic [19:0]  c_addr = 0;
  logic [31:0]  c_wdata = 0, c_rdata;
  logic [17:0]  d_addr = 0;
  logic [127:0] d_wdata = 0, d_rdata;

  local_memory dut (.*);

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

  logic [127:0] beat;
  logic [17:0]  a;
  logic [31:0]  words [4];
  initial begin
    for (int t = 0; t < 20; t++) begin
      a    = 18'($urandom);
      beat = {$urandom, $urandom, $urandom, $urandom};
      @(negedge clk); d_req = 1; d_we = 1; d_addr = a; d_wdata = beat;
      @(negedge clk); d_req = 0; d_we = 0;
      for (int j = 0; j < 4; j++) begin
        c_addr = {a, 2'(j)}; c_req = 1;
        @(negedge clk); c_req = 0;
        ok(c_rvalid && c_rdata == beat[127-32*j -: 32], "core read of DMA write");
      end
      for (int j = 0; j < 4; j++) begin
        words[j] = $urandom;
        c_addr = {a, 2'(j)}; c_req = 1; c_we = 1; c_wdata = words[j];
        @(negedge clk); c_req = 0; c_we = 0;
      end
      d_req = 1; d_addr = a;
      @(negedge clk); d_req = 0;
      ok(d_rvalid && d_rdata == {words[0], words[1], words[2], words[3]}, "DMA read of core writes");
    end
    c_req = 1; c_we = 1; c_addr = {18'd5, 2'd3}; c_wdata = 32'h1;
    d_req = 1; d_we = 1; d_addr = 18'd5; d_wdata = {4{32'h2}};
    @(negedge clk); c_we = 0; d_req = 0; d_we = 0;
    @(negedge clk); c_req = 0; ok(c_rdata == 32'h2, "DMA port wins collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
