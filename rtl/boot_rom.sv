// boot_rom: read-only memory shared by the PIM cores of a memory module; in
// the paper it holds the secure loader, the attestation code and the key
// exchange code used before a kernel runs.
//
// DEPTH words of 32 bits, one registered read port per core, so the cores
// never wait for each other. The contents are this device's firmware; they
// are loaded from INIT_FILE (hex, one word per line) when one is given and
// are zero otherwise. The paper gives the ROM's role and its sharing among
// cores; its size and its contents are not given (DEPTH is an assumed
// 16 KB). Reads return one cycle after the request.
module boot_rom #(
  parameter int unsigned N_PORTS   = 8,
  parameter int unsigned DEPTH     = 4096,
  parameter string       INIT_FILE = ""
) (
  input  logic                     clk,
  input  logic [N_PORTS-1:0]       req,
  input  logic [$clog2(DEPTH)-1:0] addr  [N_PORTS],
  output logic [N_PORTS-1:0]       rvalid,
  output logic [31:0]              rdata [N_PORTS]
);

  logic [31:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++) rom[i] = '0;
    if (INIT_FILE != "") $readmemh(INIT_FILE, rom);
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < N_PORTS; p++) begin
      rvalid[p] <= req[p];
      if (req[p]) rdata[p] <= rom[addr[p]];
    end
  end

endmodule
