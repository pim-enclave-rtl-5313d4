// pim_enclave: one PIM-Enclave-enabled memory bank, the box the paper
// replicates once per bank.
//
// Inside: the memory bank, the bank access control in front of the host's
// ordinary accesses, the command channel (MMIO registers), the PIM local
// memory and the AES-capable DMA engine. The PIM core itself is outside (an
// off-the-shelf in-order core); its 32-bit bus comes in on core_i, and the
// shared ROM and key storage of the module are reached through the rom_* and
// ks_* ports.
//
// Host side (host_i / host_o), one word per request, read data one cycle
// later:
//   REG_MEM    ordinary bank access at {row, col}, filtered by access control;
//   REG_PARAM  the parameter channel: a fixed-size buffer of one DRAM row
//              (2^COL_W words, 4 KB by default) at row DMA_BUF_ROW; it is
//              not filtered, so the host can pass encrypted parameters while
//              the rest of the bank is locked;
//   REG_CMD    the command channel, addr[0] selects command / status.
// Core side (core_i / core_o), word address [22:21] selects local memory,
// the register file (DMA, AES keys and counter, access control, command
// channel), the shared ROM or the shared key storage. Every region answers
// reads one cycle after the request.
//
// The set of parts and their connections follow the paper's overview
// figure; the address maps, the placement of the parameter buffer and the
// one-cycle response on every path are this design's choices.
module pim_enclave
  import pim_pkg::*;
#(
  parameter int unsigned BANK_ROW_W  = 14,
  parameter int unsigned BANK_COL_W  = 10,
  parameter int unsigned LOCAL_AW    = 18,        // local memory beats (4 MB)
  parameter int unsigned ROM_AW      = 12,        // ROM words
  parameter logic [BANK_ROW_W-1:0] DMA_BUF_ROW = '1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // host side
  input  host_req_t             host_i,
  output word_rsp_t             host_o,
  // PIM core side
  input  core_req_t             core_i,
  output word_rsp_t             core_o,
  // shared ROM
  output logic                  rom_req,
  output logic [ROM_AW-1:0]     rom_addr,
  input  logic [31:0]           rom_rdata,
  // shared key storage
  output logic                  ks_req,
  output logic [1:0]            ks_addr,
  output logic [31:0]           ks_pc,
  input  logic [31:0]           ks_rdata,
  // status
  output logic                  dma_busy,
  output logic                  dma_done,
  output logic                  dma_auth_fail,
  output logic                  cmd_pending,
  output logic                  host_blocked
);

  localparam int unsigned BANK_AW = BANK_ROW_W + BANK_COL_W - 2;

  // ------------------------------------------------------------ host decode
  logic [BANK_ROW_W-1:0] h_row;
  logic [BANK_COL_W-1:0] h_col;
  assign {h_row, h_col} = host_i.addr[BANK_ROW_W+BANK_COL_W-1:0];

  logic h_mem, h_param, h_cmd;
  assign h_mem   = host_i.req && host_i.region == REG_MEM;
  assign h_param = host_i.req && host_i.region == REG_PARAM;
  assign h_cmd   = host_i.req && host_i.region == REG_CMD;

  // access control
  logic                  ac_b_req, ac_b_we;
  logic [BANK_ROW_W-1:0] ac_b_row;
  logic [BANK_COL_W-1:0] ac_b_col;
  logic [31:0]           ac_b_wdata, ac_h_rdata, ac_cfg_rdata;

  // bank host port
  logic                  bk_h_req, bk_h_we, bk_h_rvalid;
  logic [BANK_ROW_W-1:0] bk_h_row;
  logic [BANK_COL_W-1:0] bk_h_col;
  logic [31:0]           bk_h_wdata, bk_h_rdata;

  // register file write strobe from the core
  logic        reg_we;
  logic [7:0]  reg_addr;
  logic [31:0] reg_wdata;

  access_control #(.ROW_W(BANK_ROW_W), .COL_W(BANK_COL_W)) u_ac (
    .clk, .rst_n,
    .cfg_we(reg_we), .cfg_addr(reg_addr), .cfg_wdata(reg_wdata), .cfg_rdata(ac_cfg_rdata),
    .h_req(h_mem), .h_we(host_i.we), .h_row, .h_col, .h_wdata(host_i.wdata),
    .h_rdata(ac_h_rdata), .host_blocked,
    .b_req(ac_b_req), .b_we(ac_b_we), .b_row(ac_b_row), .b_col(ac_b_col),
    .b_wdata(ac_b_wdata), .b_rdata(bk_h_rdata)
  );

  always_comb begin
    if (h_param) begin
      bk_h_req   = 1'b1;
      bk_h_we    = host_i.we;
      bk_h_row   = DMA_BUF_ROW;
      bk_h_col   = h_col;
      bk_h_wdata = host_i.wdata;
    end else begin
      bk_h_req   = ac_b_req;
      bk_h_we    = ac_b_we;
      bk_h_row   = ac_b_row;
      bk_h_col   = ac_b_col;
      bk_h_wdata = ac_b_wdata;
    end
  end

  // command channel
  logic        cc_h_rvalid;
  logic [31:0] cc_h_rdata, cc_p_rdata;

  cmd_channel u_cmd (
    .clk, .rst_n,
    .h_req(h_cmd), .h_we(host_i.we), .h_addr(host_i.addr[0]), .h_wdata(host_i.wdata),
    .h_rvalid(cc_h_rvalid), .h_rdata(cc_h_rdata),
    .p_we(reg_we), .p_addr(reg_addr), .p_wdata(reg_wdata), .p_rdata(cc_p_rdata),
    .cmd_pending
  );

  // host response
  host_region_e h_region_q;
  logic         h_rd_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      h_region_q <= REG_NONE;
      h_rd_q     <= 1'b0;
    end else begin
      h_region_q <= host_i.region;
      h_rd_q     <= host_i.req && !host_i.we;
    end
  end

  always_comb begin
    host_o.rvalid = h_rd_q;
    unique case (h_region_q)
      REG_MEM:   host_o.rdata = ac_h_rdata;
      REG_PARAM: host_o.rdata = bk_h_rdata;
      REG_CMD:   host_o.rdata = cc_h_rdata;
      default:   host_o.rdata = '0;
    endcase
  end

  // ------------------------------------------------------------ memories
  logic                  bk_w_req, bk_w_we, bk_w_rvalid;
  logic [BANK_AW-1:0]    bk_w_addr;
  logic [127:0]          bk_w_wdata, bk_w_rdata;

  memory_bank #(.ROW_W(BANK_ROW_W), .COL_W(BANK_COL_W)) u_bank (
    .clk,
    .h_req(bk_h_req), .h_we(bk_h_we), .h_row(bk_h_row), .h_col(bk_h_col),
    .h_wdata(bk_h_wdata), .h_rvalid(bk_h_rvalid), .h_rdata(bk_h_rdata),
    .w_req(bk_w_req), .w_we(bk_w_we), .w_addr(bk_w_addr), .w_wdata(bk_w_wdata),
    .w_rvalid(bk_w_rvalid), .w_rdata(bk_w_rdata)
  );

  logic                  lm_c_req, lm_c_rvalid, lm_d_req, lm_d_we, lm_d_rvalid;
  logic [31:0]           lm_c_rdata;
  logic [LOCAL_AW-1:0]   lm_d_addr;
  logic [127:0]          lm_d_wdata, lm_d_rdata;

  local_memory #(.BEAT_AW(LOCAL_AW)) u_local (
    .clk,
    .c_req(lm_c_req), .c_we(core_i.we), .c_addr(core_i.addr[LOCAL_AW+1:0]),
    .c_wdata(core_i.wdata), .c_rvalid(lm_c_rvalid), .c_rdata(lm_c_rdata),
    .d_req(lm_d_req), .d_we(lm_d_we), .d_addr(lm_d_addr), .d_wdata(lm_d_wdata),
    .d_rvalid(lm_d_rvalid), .d_rdata(lm_d_rdata)
  );

  // ------------------------------------------------------------ DMA + AES
  logic [31:0] dma_cfg_rdata;

  aes_dma_engine #(.BANK_AW(BANK_AW), .LOCAL_AW(LOCAL_AW)) u_dma (
    .clk, .rst_n,
    .cfg_we(reg_we), .cfg_addr(reg_addr), .cfg_wdata(reg_wdata), .cfg_rdata(dma_cfg_rdata),
    .b_req(bk_w_req), .b_we(bk_w_we), .b_addr(bk_w_addr), .b_wdata(bk_w_wdata),
    .b_rdata(bk_w_rdata),
    .l_req(lm_d_req), .l_we(lm_d_we), .l_addr(lm_d_addr), .l_wdata(lm_d_wdata),
    .l_rdata(lm_d_rdata),
    .busy(dma_busy), .done(dma_done), .auth_fail(dma_auth_fail)
  );

  // ------------------------------------------------------------ core decode
  core_region_e c_region, c_region_q;
  assign c_region = core_region_e'(core_i.addr[CORE_AW-1 -: 2]);

  assign lm_c_req  = core_i.req && c_region == CR_LOCAL;
  assign reg_we    = core_i.req && core_i.we && c_region == CR_REGS;
  assign reg_addr  = core_i.addr[7:0];
  assign reg_wdata = core_i.wdata;
  assign rom_req   = core_i.req && !core_i.we && c_region == CR_ROM;
  assign rom_addr  = core_i.addr[ROM_AW-1:0];
  assign ks_req    = core_i.req && !core_i.we && c_region == CR_KEY;
  assign ks_addr   = core_i.addr[1:0];
  assign ks_pc     = core_i.pc;

  logic [31:0] reg_rdata, reg_rdata_q;
  always_comb begin
    if (reg_addr < 8'h18)      reg_rdata = dma_cfg_rdata;
    else if (reg_addr < 8'h20) reg_rdata = ac_cfg_rdata;
    else                       reg_rdata = cc_p_rdata;
  end

  logic c_rd_q;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c_region_q  <= CR_LOCAL;
      c_rd_q      <= 1'b0;
      reg_rdata_q <= '0;
    end else begin
      c_region_q  <= c_region;
      c_rd_q      <= core_i.req && !core_i.we;
      reg_rdata_q <= reg_rdata;
    end
  end

  always_comb begin
    core_o.rvalid = c_rd_q;
    unique case (c_region_q)
      CR_LOCAL: core_o.rdata = lm_c_rdata;
      CR_REGS:  core_o.rdata = reg_rdata_q;
      CR_ROM:   core_o.rdata = rom_rdata;
      default:  core_o.rdata = ks_rdata;
    endcase
  end

endmodule
