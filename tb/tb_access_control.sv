// tb_access_control: programs row/column mask and base registers and checks
// every host access against an independently computed permission: reads of
// filtered addresses return zero, filtered writes do not reach the bank, and
// mask = base = 0 lets everything through.
module tb_access_control;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        cfg_we = 0;
  logic [7:0]  cfg_addr = 0;
  logic [31:0] cfg_wdata = 0, cfg_rdata;
  logic        h_req = 0, h_we = 0, host_blocked, b_req, b_we;
  logic [13:0] h_row = 0, b_row;
  logic [9:0]  h_col = 0, b_col;
  logic [31:0] h_wdata = 0, h_rdata, b_wdata;
  logic [31:0] b_rdata;

  // bank stand-in: returns a function of the address one cycle later
  always_ff @(posedge clk) if (b_req) b_rdata <= {8'hA5, b_row, b_col};

  access_control dut (.*);

  int checks = 0, failures = 0;
  task automatic ok(input bit c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  logic [13:0] rm, rb;
  logic [9:0]  cm, cb;
  int blocked_seen = 0, passed_seen = 0;

  task automatic access(input logic [13:0] r, input logic [9:0] c, input bit we);
    bit allow;
    allow = ((r & rm) == rb) && ((c & cm) == cb);
    @(negedge clk);
    h_req = 1; h_we = we; h_row = r; h_col = c; h_wdata = $urandom;
    #1;
    ok(host_blocked == !allow, "blocked flag");
    if (we) ok(b_we == allow, "write enable gated");
    @(negedge clk);
    h_req = 0; h_we = 0;
    if (!we) ok(h_rdata == (allow ? {8'hA5, r, c} : 32'h0), "read data gated");
    if (allow) passed_seen++; else blocked_seen++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // after reset everything passes
    rm = 0; rb = 0; cm = 0; cb = 0;
    for (int i = 0; i < 20; i++) access(14'($urandom), 10'($urandom), i[0]);
    for (int t = 0; t < 8; t++) begin
      rm = 14'($urandom) & 14'h3C0F; rb = 14'($urandom) & rm;
      cm = 10'($urandom) & 10'h30F;  cb = 10'($urandom) & cm;
      wr(R_AC_ROW_MASK, 32'(rm)); wr(R_AC_ROW_BASE, 32'(rb));
      wr(R_AC_COL_MASK, 32'(cm)); wr(R_AC_COL_BASE, 32'(cb));
      cfg_addr = R_AC_COL_MASK;
      #1 ok(cfg_rdata == 32'(cm), "register read back");
      for (int i = 0; i < 40; i++) begin
        logic [13:0] r;
        logic [9:0]  c;
        r = 14'($urandom); c = 10'($urandom);
        if (i % 4 == 0) begin r = (r & ~rm) | rb; c = (c & ~cm) | cb; end
        access(r, c, i[0]);
      end
    end
    // disable again with zero registers
    rm = 0; rb = 0; cm = 0; cb = 0;
    wr(R_AC_ROW_MASK, 0); wr(R_AC_ROW_BASE, 0); wr(R_AC_COL_MASK, 0); wr(R_AC_COL_BASE, 0);
    for (int i = 0; i < 20; i++) access(14'($urandom), 10'($urandom), i[0]);
    ok(blocked_seen > 0 && passed_seen > 0, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
