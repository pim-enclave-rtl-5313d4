// cmd_channel: the command channel (MMIO registers) between the host and
// one PIM-Enclave core.
//
// The host writes a command word (command number from pim_pkg::pim_cmd_e in
// bits [7:0]; the remaining bits are free for the host's software, e.g. an
// encrypted and authenticated command token) to host offset 0. That sets a
// pending flag that the PIM core polls (R_CMD_PENDING) and acknowledges by
// writing 1 to it, after reading the word (R_CMD_VALUE). The PIM core
// reports progress or completion in a status word (R_PIM_STATUS) that the
// host polls at host offset 1. Host reads: offset 0 returns the pending
// flag, offset 1 the status word. A host write in the same cycle as an
// acknowledge wins. What the commands do is the PIM core's software; the
// paper gives the channel's purpose and the command list, the register
// layout is this design's.
//
// Timing: host reads return one cycle after the request (h_rvalid); PIM
// reads are combinational and registered by the enclave's bus decode.
module cmd_channel
  import pim_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  // host side
  input  logic        h_req,
  input  logic        h_we,
  input  logic        h_addr,
  input  logic [31:0] h_wdata,
  output logic        h_rvalid,
  output logic [31:0] h_rdata,
  // PIM core side
  input  logic        p_we,
  input  logic [7:0]  p_addr,
  input  logic [31:0] p_wdata,
  output logic [31:0] p_rdata,
  output logic        cmd_pending
);

  logic [31:0] cmd_q, status_q;
  logic        pending_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cmd_q     <= '0;
      status_q  <= '0;
      pending_q <= 1'b0;
      h_rvalid  <= 1'b0;
      h_rdata   <= '0;
    end else begin
      h_rvalid <= h_req && !h_we;
      if (h_req && !h_we) h_rdata <= h_addr ? status_q : {31'h0, pending_q};
      if (p_we && p_addr == R_PIM_STATUS) status_q <= p_wdata;
      if (h_req && h_we && !h_addr) begin
        cmd_q     <= h_wdata;
        pending_q <= 1'b1;
      end else if (p_we && p_addr == R_CMD_PENDING && p_wdata[0]) begin
        pending_q <= 1'b0;
      end
    end
  end

  always_comb begin
    unique case (p_addr)
      R_CMD_PENDING: p_rdata = {31'h0, pending_q};
      R_CMD_VALUE:   p_rdata = cmd_q;
      R_PIM_STATUS:  p_rdata = status_q;
      default:       p_rdata = '0;
    endcase
  end

  assign cmd_pending = pending_q;

endmodule
