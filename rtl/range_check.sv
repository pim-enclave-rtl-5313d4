// range_check: one range check of the bank access-control logic.
//
// As drawn in the paper's figure: the incoming address is ANDed with the
// range-mask register and compared bit by bit with the range-base register
// through XNOR gates; the XNOR outputs are ANDed into one "ok" bit. With
// mask = base = 0 every address is ok, which is how the paper disables the
// access control. Purely combinational.
module range_check #(
  parameter int unsigned W = 10
) (
  input  logic [W-1:0] addr,
  input  logic [W-1:0] mask,
  input  logic [W-1:0] base,
  output logic         ok
);
  assign ok = &((addr & mask) ~^ base);
endmodule
