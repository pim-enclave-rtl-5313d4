// gf128_mul: multiplication in GF(2^128) as defined for GHASH (NIST SP
// 800-38D), combinational.
//
// Bit strings follow the GCM convention: the leftmost bit x_0 of a block is
// bit [127]. The product is the shift-and-add loop of the standard: for each
// bit of a, from x_0 on, add v when the bit is set, then multiply v by x,
// which is a right shift with reduction by R = 0xE1 || 0^120. Used by the
// AES-GCM engine to fold one block per cycle into the hash.
module gf128_mul (
  input  logic [127:0] a,
  input  logic [127:0] b,
  output logic [127:0] p
);

  always_comb begin
    logic [127:0] z, v;
    z = '0;
    v = b;
    for (int i = 0; i < 128; i++) begin
      if (a[127-i]) z = z ^ v;
      v = v[0] ? ((v >> 1) ^ {8'hE1, 120'h0}) : (v >> 1);
    end
    p = z;
  end

endmodule
