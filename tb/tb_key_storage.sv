// tb_key_storage: checks that each core port returns the endorsement key
// only while its PC is inside the attestation window and returns zero with
// denied set otherwise, with all ports used at once.
module tb_key_storage;
  localparam int N = 4;
  localparam logic [127:0] EK = 128'h00112233_44556677_8899aabb_ccddeeff;
  localparam logic [31:0] LO = 32'h0000_1000, HI = 32'h0000_1fff;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] req = 0, rvalid, denied;
  logic [1:0]   addr [N];
  logic [31:0]  pc [N], rdata [N];

  key_storage #(.N_PORTS(N), .EK(EK), .ATTEST_PC_LO(LO), .ATTEST_PC_HI(HI)) dut (.*);

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

  logic [31:0] pcs [N];
  logic [1:0]  as  [N];
  int granted = 0, refused = 0;
  int unsigned sel;
  initial begin
    foreach (addr[p]) begin addr[p] = 0; pc[p] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      @(negedge clk);
      for (int p = 0; p < N; p++) begin
        sel = $urandom % 4;
        unique case (sel)
          0: pcs[p] = LO + ($urandom % (HI - LO + 1));
          1: pcs[p] = (t % 2) ? LO : HI;
          2: pcs[p] = (t % 2) ? LO - 1 : HI + 1;
          default: pcs[p] = $urandom;
        endcase
        as[p] = 2'($urandom);
        pc[p] = pcs[p]; addr[p] = as[p];
      end
      req = '1;
      @(negedge clk);
      req = '0;
      for (int p = 0; p < N; p++) begin
        bit in_win;
        in_win = (pcs[p] >= LO) && (pcs[p] <= HI);
        ok(rvalid[p], "rvalid");
        ok(rdata[p] == (in_win ? EK[127-32*as[p] -: 32] : 32'h0), "key word gated by PC");
        ok(denied[p] == !in_win, "denied flag");
        if (in_win) granted++; else refused++;
      end
    end
    ok(granted > 0 && refused > 0, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
