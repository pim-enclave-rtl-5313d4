// key_storage: secure storage of the endorsement key (EK), shared by the
// PIM cores of one memory module, guarded by a program-counter monitor.
//
// Each core has a read port (4 words of 32 bits, word 0 = EK[127:96]) and
// presents its program counter with every read. The monitor releases the
// key only while that PC lies inside the attestation code, [ATTEST_PC_LO,
// ATTEST_PC_HI]; any other read returns zero and pulses denied. The paper
// asks for exactly this monitor and for sharing key storage among cores;
// the EK width, the window bounds and the per-core ports are this design's
// choices. EK is a parameter standing for a per-device fused secret; its
// default is a placeholder. Reads return one cycle after the request.
module key_storage #(
  parameter int unsigned  N_PORTS      = 8,
  parameter logic [127:0] EK           = 128'h5a17_c3e9_0b4d_8f26_e1a7_3c95_d208_7b6f,
  parameter logic [31:0]  ATTEST_PC_LO = 32'h0000_0000,
  parameter logic [31:0]  ATTEST_PC_HI = 32'h0000_0fff
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_PORTS-1:0] req,
  input  logic [1:0]        addr  [N_PORTS],
  input  logic [31:0]       pc    [N_PORTS],
  output logic [N_PORTS-1:0] rvalid,
  output logic [31:0]       rdata [N_PORTS],
  output logic [N_PORTS-1:0] denied
);

  always_ff @(posedge clk) begin
    for (int p = 0; p < N_PORTS; p++) begin
      if (!rst_n) begin
        rvalid[p] <= 1'b0;
        denied[p] <= 1'b0;
        rdata[p]  <= '0;
      end else begin
        rvalid[p] <= req[p];
        denied[p] <= 1'b0;
        if (req[p]) begin
          if (pc[p] >= ATTEST_PC_LO && pc[p] <= ATTEST_PC_HI) begin
            rdata[p] <= EK[127 - 32*addr[p] -: 32];
          end else begin
            rdata[p]  <= '0;
            denied[p] <= 1'b1;
          end
        end
      end
    end
  end

endmodule
