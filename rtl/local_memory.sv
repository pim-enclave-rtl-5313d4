// local_memory: PIM local memory of one PIM-Enclave core, 4 MB by default
// (the paper's configuration), holding the kernel's code and data.
//
// Two ports: the PIM core's 32-bit word port and the DMA engine's 128-bit
// beat port (the AES engine writes decrypted data here and reads plaintext
// from here). Word j of a beat is bits [127-32j -: 32]. Each port takes a
// request in one cycle and returns read data on the next; the paper models
// local memory as near-zero latency, and one registered cycle is the
// shortest a synchronous memory gives. If both ports write the same word in
// one cycle, the DMA port wins. Contents are not reset.
module local_memory #(
  parameter int unsigned BEAT_AW = 18     // 2^18 beats x 16 B = 4 MB
) (
  input  logic                 clk,
  // core port, word address
  input  logic                 c_req,
  input  logic                 c_we,
  input  logic [BEAT_AW+1:0]   c_addr,
  input  logic [31:0]          c_wdata,
  output logic                 c_rvalid,
  output logic [31:0]          c_rdata,
  // DMA port, beat address
  input  logic                 d_req,
  input  logic                 d_we,
  input  logic [BEAT_AW-1:0]   d_addr,
  input  logic [127:0]         d_wdata,
  output logic                 d_rvalid,
  output logic [127:0]         d_rdata
);

  localparam int unsigned NBEATS = 2 ** BEAT_AW;

  logic [127:0] mem [NBEATS];

  logic [BEAT_AW-1:0] c_beat;
  logic [1:0]         c_lane;
  assign {c_beat, c_lane} = c_addr;

  always_ff @(posedge clk) begin
    c_rvalid <= c_req && !c_we;
    d_rvalid <= d_req && !d_we;
    if (c_req) begin
      if (c_we) mem[c_beat][127 - 32*c_lane -: 32] <= c_wdata;
      else      c_rdata <= mem[c_beat][127 - 32*c_lane -: 32];
    end
    if (d_req) begin
      if (d_we) mem[d_addr] <= d_wdata;
      else      d_rdata <= mem[d_addr];
    end
  end

endmodule
