// memory_bank: storage of one PIM-Enclave bank, 64 MB by default.
//
// The host side sees DDR4-style addressing: a 14-bit row and a 10-bit column
// (the widths printed in the paper's access-control figure), one 32-bit word
// per column, so 2^24 words = 64 MB, the paper's bank size. Inside the
// package the DMA engine reads and writes whole 128-bit beats (four columns,
// one AES block) through a second, wide port; the paper's PIM core has
// direct, wide access to its own bank, and this port stands for that.
//
// The array is a plain two-port memory: both ports take a request in one
// cycle and return read data on the next (rvalid). If both ports write the
// same word in one cycle, the wide (DMA) port wins. The DRAM cell array,
// decoders and sense amplifiers of a real bank are not modelled; only the
// storage function and the addressing are. Contents are not reset.
module memory_bank #(
  parameter int unsigned ROW_W = 14,
  parameter int unsigned COL_W = 10
) (
  input  logic                      clk,
  // host column port, behind the access control
  input  logic                      h_req,
  input  logic                      h_we,
  input  logic [ROW_W-1:0]          h_row,
  input  logic [COL_W-1:0]          h_col,
  input  logic [31:0]               h_wdata,
  output logic                      h_rvalid,
  output logic [31:0]               h_rdata,
  // wide port for the DMA engine, beat address = byte address / 16
  input  logic                      w_req,
  input  logic                      w_we,
  input  logic [ROW_W+COL_W-3:0]    w_addr,
  input  logic [127:0]              w_wdata,
  output logic                      w_rvalid,
  output logic [127:0]              w_rdata
);

  localparam int unsigned BEAT_AW = ROW_W + COL_W - 2;
  localparam int unsigned NBEATS  = 2 ** BEAT_AW;

  logic [127:0] mem [NBEATS];

  logic [BEAT_AW-1:0] h_beat;
  logic [1:0]         h_lane;
  assign {h_beat, h_lane} = {h_row, h_col};

  always_ff @(posedge clk) begin
    h_rvalid <= h_req && !h_we;
    w_rvalid <= w_req && !w_we;
    if (h_req) begin
      if (h_we) mem[h_beat][127 - 32*h_lane -: 32] <= h_wdata;
      else      h_rdata <= mem[h_beat][127 - 32*h_lane -: 32];
    end
    if (w_req) begin
      if (w_we) mem[w_addr] <= w_wdata;
      else      w_rdata <= mem[w_addr];
    end
  end

endmodule
