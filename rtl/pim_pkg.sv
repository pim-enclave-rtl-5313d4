// pim_pkg: types and constants shared by the PIM-Enclave RTL.
//
// The memory bank is addressed by the host as DDR4-style row and column
// addresses (14-bit row, 10-bit column, as printed in the access-control
// figure); one column holds a 32-bit word, so a bank holds 2^24 words = 64 MB.
// Inside the PIM-Enclave, memories are also read and written in 128-bit
// beats, one AES block each. Byte 0 of a beat is bits [127:120] (the byte
// order of the AES and GCM standards); 32-bit word j of a beat is bits
// [127-32j -: 32].
//
// Command numbers, DMA command codes and the register map are this design's
// own choices; the command names come from the paper's command table.
package pim_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned ROW_W      = 14;   // row address bits (Fig. 2)
  localparam int unsigned COL_W      = 10;   // column address bits (Fig. 2)
  localparam int unsigned HOST_AW    = ROW_W + COL_W;  // host word address
  localparam int unsigned WORD_W     = 32;   // host / core word
  localparam int unsigned BEAT_W     = 128;  // DMA beat, one AES block
  localparam int unsigned BEAT_BYTES = BEAT_W / 8;

  // ----------------------------------------------------- host bus regions
  typedef enum logic [1:0] {
    REG_MEM   = 2'd0,   // ordinary bank access, filtered by access control
    REG_PARAM = 2'd1,   // parameter channel: fixed-size DMA buffer in the bank
    REG_CMD   = 2'd2,   // command channel: MMIO registers
    REG_NONE  = 2'd3    // unmapped, reads return zero
  } host_region_e;

  // ------------------------------------------- commands (paper's Table 1)
  // The host writes one of these numbers into the command register; the
  // PIM core's software carries it out.
  typedef enum logic [7:0] {
    CMD_NOP             = 8'h00,
    CMD_GET_TOKEN       = 8'h01,
    CMD_SET_SESSION_KEY = 8'h02,
    CMD_SET_DATA_KEY    = 8'h03,
    CMD_OFFLOAD_KERNEL  = 8'h04,
    CMD_EXECUTE         = 8'h05,
    CMD_PROTECT         = 8'h06,
    CMD_DESTROY         = 8'h07
  } pim_cmd_e;

  // ----------------------------------------------------- DMA commands
  // DMA_CMD register: bits [2:0] operation, bit 4 key select.
  typedef enum logic [2:0] {
    DMA_NONE              = 3'd0,
    DMA_BANK_TO_LOCAL     = 3'd1,  // plain copy, bank -> local memory
    DMA_LOCAL_TO_BANK     = 3'd2,  // plain copy, local memory -> bank
    DMA_DECRYPT_TRANSFER  = 3'd3,  // bank (IV|TAG|ciphertext) -> local plaintext
    DMA_ENCRYPT_TRANSFER  = 3'd4   // local plaintext -> bank (IV|TAG|ciphertext)
  } dma_op_e;

  localparam int unsigned DMA_KEYSEL_BIT = 4;  // 0: data key, 1: session key

  // DMA_STATUS bits
  localparam int unsigned ST_BUSY      = 0;
  localparam int unsigned ST_DONE      = 1;
  localparam int unsigned ST_AUTH_FAIL = 2;

  // ------------------------------------------ PIM core address map
  // Core word address: [22:21] region, rest offset (32-bit words).
  localparam int unsigned CORE_AW = 23;
  typedef enum logic [1:0] {
    CR_LOCAL = 2'd0,   // local memory (code and data)
    CR_REGS  = 2'd1,   // DMA, AES, access-control and command-channel registers
    CR_ROM   = 2'd2,   // shared read-only memory
    CR_KEY   = 2'd3    // shared key storage (EK)
  } core_region_e;

  // Register offsets inside CR_REGS (word offsets)
  localparam logic [7:0] R_DMA_SRC     = 8'h00;  // byte address
  localparam logic [7:0] R_DMA_DST     = 8'h01;  // byte address
  localparam logic [7:0] R_DMA_SIZE    = 8'h02;  // bytes, multiple of 16
  localparam logic [7:0] R_DMA_CMD     = 8'h03;  // write starts a transfer
  localparam logic [7:0] R_DMA_STATUS  = 8'h04;  // read only
  localparam logic [7:0] R_DATA_KEY0   = 8'h08;  // 0x08..0x0B, write only
  localparam logic [7:0] R_SESS_KEY0   = 8'h0C;  // 0x0C..0x0F, write only
  localparam logic [7:0] R_COUNTER0    = 8'h10;  // 0x10..0x12, 96-bit IV counter
  localparam logic [7:0] R_AC_ROW_MASK = 8'h18;
  localparam logic [7:0] R_AC_ROW_BASE = 8'h19;
  localparam logic [7:0] R_AC_COL_MASK = 8'h1A;
  localparam logic [7:0] R_AC_COL_BASE = 8'h1B;
  localparam logic [7:0] R_CMD_PENDING = 8'h20;  // read: bit0 pending; write 1: ack
  localparam logic [7:0] R_CMD_VALUE   = 8'h21;  // read: last host command word
  localparam logic [7:0] R_PIM_STATUS  = 8'h22;  // write: status seen by the host

  // ---------------------------------------------------------- bundles
  typedef struct packed {
    logic                 req;
    logic                 we;
    host_region_e         region;
    logic [HOST_AW-1:0]   addr;    // {row, col} word address
    logic [WORD_W-1:0]    wdata;
  } host_req_t;

  typedef struct packed {
    logic                 req;
    logic                 we;
    logic [CORE_AW-1:0]   addr;    // word address
    logic [WORD_W-1:0]    wdata;
    logic [31:0]          pc;      // program counter, for the key-storage monitor
  } core_req_t;

  typedef struct packed {
    logic                 rvalid;
    logic [WORD_W-1:0]    rdata;
  } word_rsp_t;

endpackage
