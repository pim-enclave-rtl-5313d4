// pim_enclave_module: a PIM-Enclave memory module, the design's top.
//
// N_BANKS (8, the paper's configuration) PIM-Enclave banks, each with its
// own 64 MB bank, 4 MB local memory, AES-capable DMA engine, access control
// and command channel, plus one ROM and one key storage shared by all the
// banks' cores (the paper shares them to save area). Banks share nothing
// else: a core reaches only its own bank and local memory.
//
// Host bus: one word request per cycle, host_bank selects the bank,
// host_i.region the path inside it (ordinary access, parameter buffer,
// command channel); read data returns one cycle later on host_o. The memory
// bus protocol itself (DDR4 or a 3D-stack packet link) is not modelled.
// Core buses: core_i[b] / core_o[b] carry the 32-bit bus of bank b's PIM
// core, which is outside this RTL. Status outputs per bank show DMA
// activity, authentication failure, a pending host command, a host access
// dropped by the access control and a refused key-storage read.
module pim_enclave_module
  import pim_pkg::*;
#(
  parameter int unsigned  N_BANKS      = 8,
  parameter int unsigned  BANK_ROW_W   = 14,
  parameter int unsigned  BANK_COL_W   = 10,
  parameter int unsigned  LOCAL_AW     = 18,
  parameter int unsigned  ROM_DEPTH    = 4096,
  parameter string        ROM_INIT     = "",
  parameter logic [127:0] EK           = 128'h5a17_c3e9_0b4d_8f26_e1a7_3c95_d208_7b6f,
  parameter logic [31:0]  ATTEST_PC_LO = 32'h0000_0000,
  parameter logic [31:0]  ATTEST_PC_HI = 32'h0000_0fff
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host bus
  input  host_req_t                   host_i,
  input  logic [$clog2(N_BANKS)-1:0]  host_bank,
  output word_rsp_t                   host_o,
  // PIM core buses
  input  core_req_t                   core_i [N_BANKS],
  output word_rsp_t                   core_o [N_BANKS],
  // status per bank
  output logic [N_BANKS-1:0]          dma_busy,
  output logic [N_BANKS-1:0]          dma_done,
  output logic [N_BANKS-1:0]          dma_auth_fail,
  output logic [N_BANKS-1:0]          cmd_pending,
  output logic [N_BANKS-1:0]          host_blocked,
  output logic [N_BANKS-1:0]          ek_denied
);

  localparam int unsigned ROM_AW = $clog2(ROM_DEPTH);

  host_req_t   h_req  [N_BANKS];
  word_rsp_t   h_rsp  [N_BANKS];

  logic [N_BANKS-1:0] rom_req, ks_req, rom_rvalid, ks_rvalid;
  logic [ROM_AW-1:0]  rom_addr  [N_BANKS];
  logic [31:0]        rom_rdata [N_BANKS];
  logic [1:0]         ks_addr   [N_BANKS];
  logic [31:0]        ks_pc     [N_BANKS];
  logic [31:0]        ks_rdata  [N_BANKS];

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    always_comb begin
      h_req[b]     = host_i;
      h_req[b].req = host_i.req && host_bank == b;
    end

    pim_enclave #(
      .BANK_ROW_W(BANK_ROW_W), .BANK_COL_W(BANK_COL_W),
      .LOCAL_AW(LOCAL_AW), .ROM_AW(ROM_AW)
    ) u_enclave (
      .clk, .rst_n,
      .host_i(h_req[b]), .host_o(h_rsp[b]),
      .core_i(core_i[b]), .core_o(core_o[b]),
      .rom_req(rom_req[b]), .rom_addr(rom_addr[b]), .rom_rdata(rom_rdata[b]),
      .ks_req(ks_req[b]), .ks_addr(ks_addr[b]), .ks_pc(ks_pc[b]), .ks_rdata(ks_rdata[b]),
      .dma_busy(dma_busy[b]), .dma_done(dma_done[b]), .dma_auth_fail(dma_auth_fail[b]),
      .cmd_pending(cmd_pending[b]), .host_blocked(host_blocked[b])
    );
  end

  boot_rom #(.N_PORTS(N_BANKS), .DEPTH(ROM_DEPTH), .INIT_FILE(ROM_INIT)) u_rom (
    .clk, .req(rom_req), .addr(rom_addr), .rvalid(rom_rvalid), .rdata(rom_rdata)
  );

  key_storage #(
    .N_PORTS(N_BANKS), .EK(EK), .ATTEST_PC_LO(ATTEST_PC_LO), .ATTEST_PC_HI(ATTEST_PC_HI)
  ) u_keys (
    .clk, .rst_n, .req(ks_req), .addr(ks_addr), .pc(ks_pc),
    .rvalid(ks_rvalid), .rdata(ks_rdata), .denied(ek_denied)
  );

  // host response from the bank addressed in the previous cycle
  logic [$clog2(N_BANKS)-1:0] bank_q;
  always_ff @(posedge clk) begin
    if (!rst_n) bank_q <= '0;
    else if (host_i.req) bank_q <= host_bank;
  end
  assign host_o = h_rsp[bank_q];

endmodule
