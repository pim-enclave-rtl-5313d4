// tb_cmd_channel: host writes commands, the PIM side polls, reads and
// acknowledges them, writes a status the host polls; checks the pending
// flag, a host write racing an acknowledge, and read latency.
module tb_cmd_channel;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        h_req = 0, h_we = 0, h_addr = 0, h_rvalid, p_we = 0, cmd_pending;
  logic [31:0] h_wdata = 0, h_rdata, p_wdata = 0, p_rdata;
  logic [7:0]  p_addr = 0;

  cmd_channel dut (.*);

  int checks = 0, failures = 0;
  task automatic ok(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic host_wr(input logic a, input logic [31:0] d);
    @(negedge clk); h_req = 1; h_we = 1; h_addr = a; h_wdata = d;
    @(negedge clk); h_req = 0; h_we = 0;
  endtask
  task automatic host_rd(input logic a, output logic [31:0] d);
    @(negedge clk); h_req = 1; h_we = 0; h_addr = a;
    @(negedge clk); h_req = 0; d = h_rdata;
    ok(h_rvalid, "host rvalid");
  endtask
  task automatic pim_wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); p_we = 1; p_addr = a; p_wdata = d;
    @(negedge clk); p_we = 0;
  endtask
  task automatic pim_chk(input logic [7:0] a, input logic [31:0] exp, input string what);
    p_addr = a;
    #1 ok(p_rdata == exp, what);
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] d, cmd;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    host_rd(0, d); ok(d == 0, "idle after reset");
    for (int c = 1; c <= 7; c++) begin
      cmd = {$urandom} & 32'hFFFFFF00 | 32'(c);
      host_wr(0, cmd);
      ok(cmd_pending, "pending after host write");
      @(negedge clk);
      pim_chk(R_CMD_PENDING, 1, "PIM sees pending");
      pim_chk(R_CMD_VALUE, cmd, "PIM reads command word");
      host_rd(0, d); ok(d == 1, "host sees pending");
      pim_wr(R_CMD_PENDING, 1);
      ok(!cmd_pending, "acknowledged");
      pim_wr(R_PIM_STATUS, 32'h100 | 32'(c));
      host_rd(1, d); ok(d == (32'h100 | 32'(c)), "host reads status");
      host_rd(0, d); ok(d == 0, "host sees not pending");
    end
    // host write in the same cycle as an acknowledge wins
    host_wr(0, 32'h5);
    @(negedge clk);
    h_req = 1; h_we = 1; h_wdata = 32'h6; p_we = 1; p_addr = R_CMD_PENDING; p_wdata = 1;
    @(negedge clk); h_req = 0; h_we = 0; p_we = 0;
    ok(cmd_pending, "new command survives ack");
    pim_chk(R_CMD_VALUE, 32'h6, "new command value");
    // writing 0 to the pending register does not acknowledge
    pim_wr(R_CMD_PENDING, 0);
    ok(cmd_pending, "write 0 keeps pending");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
