// tb_memory_bank: writes and reads the 64 MB bank through its host column
// port and its wide DMA port and checks that both see the same storage with
// the documented word order, one cycle of read latency, and that the DMA
// port wins a same-cycle write collision.
module tb_memory_bank;
  logic clk = 0;
  always #5 clk = ~clk;

  logic         h_req = 0, h_we = 0, h_rvalid, w_req = 0, w_we = 0, w_rvalid;
  logic [13:0]  h_row = 0;
  logic [9:0]   h_col = 0;
  logic [31:0]  h_wdata = 0, h_rdata;
  logic [21:0]  w_addr = 0;
  logic [127:0] w_wdata = 0, w_rdata;

  memory_bank dut (.*);

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
  logic [21:0]  a;
  logic [31:0]  words [4];
  initial begin
    for (int t = 0; t < 20; t++) begin
      a    = 22'($urandom);
      beat = {$urandom, $urandom, $urandom, $urandom};
      // wide write, narrow reads
      @(negedge clk); w_req = 1; w_we = 1; w_addr = a; w_wdata = beat;
      @(negedge clk); w_req = 0; w_we = 0;
      for (int j = 0; j < 4; j++) begin
        {h_row, h_col} = {a, 2'(j)};
        h_req = 1;
        @(negedge clk); h_req = 0;
        ok(h_rvalid && h_rdata == beat[127-32*j -: 32], "narrow read of wide write");
      end
      // narrow writes, wide read
      for (int j = 0; j < 4; j++) begin
        words[j] = $urandom;
        {h_row, h_col} = {a, 2'(j)};
        h_req = 1; h_we = 1; h_wdata = words[j];
        @(negedge clk); h_req = 0; h_we = 0;
      end
      w_req = 1; w_addr = a;
      @(negedge clk); w_req = 0;
      ok(w_rvalid && w_rdata == {words[0], words[1], words[2], words[3]}, "wide read of narrow writes");
    end
    // highest and lowest addresses are distinct words
    @(negedge clk); w_req = 1; w_we = 1; w_addr = '1; w_wdata = '1;
    @(negedge clk); w_addr = '0; w_wdata = '0;
    @(negedge clk); w_we = 0; w_addr = '1;
    @(negedge clk); ok(w_rdata == '1, "top beat");
    w_addr = '0;
    @(negedge clk); w_req = 0; ok(w_rdata == '0, "bottom beat");
    // collision: DMA port wins
    h_req = 1; h_we = 1; {h_row, h_col} = {22'd77, 2'd0}; h_wdata = 32'h11111111;
    w_req = 1; w_we = 1; w_addr = 22'd77; w_wdata = {4{32'h22222222}};
    @(negedge clk); h_we = 0; w_req = 0; w_we = 0;
    @(negedge clk); h_req = 0; ok(h_rdata == 32'h22222222, "wide port wins collision");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
