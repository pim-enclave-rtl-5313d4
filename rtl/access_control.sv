// access_control: bank-level access control between the memory bus and a
// PIM-Enclave memory bank.
//
// The PIM core writes four registers: row mask, row base, column mask,
// column base. Each host access is split into its row and column address;
// one range_check per field computes (addr & mask) XNOR base, reduced by
// AND, and the two results are ANDed (the paper's figure). Only when both
// checks pass does the access reach the data: a write is forwarded with its
// write enable, and read data returned from the bank is ANDed with the
// registered check result, so a filtered read returns zero. Filtered writes
// are dropped. Setting all four registers to 0 disables the filter.
//
// What follows the paper: the mask/base registers exposed to the PIM core,
// the AND / XNOR / AND structure, gating on the data-out path, and "0x0
// disables". This design's choices: a filtered read returns zero (the
// paper's simulator returns an empty packet), filtered writes are dropped
// as well (the text says all host accesses are dropped during computation),
// the register offsets, and the host_blocked pulse for monitoring.
//
// Timing: the filter is combinational on the request; read data comes back
// one cycle later, together with the bank's rvalid.
module access_control #(
  parameter int unsigned ROW_W = 14,
  parameter int unsigned COL_W = 10
) (
  input  logic              clk,
  input  logic              rst_n,
  // configuration from the PIM core
  input  logic              cfg_we,
  input  logic [7:0]        cfg_addr,
  input  logic [31:0]       cfg_wdata,
  output logic [31:0]       cfg_rdata,
  // host side
  input  logic              h_req,
  input  logic              h_we,
  input  logic [ROW_W-1:0]  h_row,
  input  logic [COL_W-1:0]  h_col,
  input  logic [31:0]       h_wdata,
  output logic [31:0]       h_rdata,
  output logic              host_blocked,
  // bank side
  output logic              b_req,
  output logic              b_we,
  output logic [ROW_W-1:0]  b_row,
  output logic [COL_W-1:0]  b_col,
  output logic [31:0]       b_wdata,
  input  logic [31:0]       b_rdata
);

  logic [ROW_W-1:0] row_mask, row_base;
  logic [COL_W-1:0] col_mask, col_base;
  logic             row_ok, col_ok, allowed, allowed_q;

  range_check #(.W(ROW_W)) u_row (.addr(h_row), .mask(row_mask), .base(row_base), .ok(row_ok));
  range_check #(.W(COL_W)) u_col (.addr(h_col), .mask(col_mask), .base(col_base), .ok(col_ok));

  assign allowed = row_ok & col_ok;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_mask  <= '0;
      row_base  <= '0;
      col_mask  <= '0;
      col_base  <= '0;
      allowed_q <= 1'b1;
    end else begin
      if (cfg_we) begin
        unique case (cfg_addr)
          pim_pkg::R_AC_ROW_MASK: row_mask <= cfg_wdata[ROW_W-1:0];
          pim_pkg::R_AC_ROW_BASE: row_base <= cfg_wdata[ROW_W-1:0];
          pim_pkg::R_AC_COL_MASK: col_mask <= cfg_wdata[COL_W-1:0];
          pim_pkg::R_AC_COL_BASE: col_base <= cfg_wdata[COL_W-1:0];
          default: ;
        endcase
      end
      if (h_req) allowed_q <= allowed;
    end
  end

  always_comb begin
    unique case (cfg_addr)
      pim_pkg::R_AC_ROW_MASK: cfg_rdata = 32'(row_mask);
      pim_pkg::R_AC_ROW_BASE: cfg_rdata = 32'(row_base);
      pim_pkg::R_AC_COL_MASK: cfg_rdata = 32'(col_mask);
      pim_pkg::R_AC_COL_BASE: cfg_rdata = 32'(col_base);
      default:       cfg_rdata = '0;
    endcase
  end

  assign b_req        = h_req;
  assign b_we         = h_we & allowed;
  assign b_row        = h_row;
  assign b_col        = h_col;
  assign b_wdata      = h_wdata;
  assign h_rdata      = b_rdata & {32{allowed_q}};
  assign host_blocked = h_req & ~allowed;

endmodule
