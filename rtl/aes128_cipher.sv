// aes128_cipher: AES-128 forward cipher, all ten rounds in one combinational
// path.
//
// The paper sizes its AES-GCM accelerator to encrypt one 128-bit block per
// clock cycle at 300 MHz. This module is that single-cycle datapath: the key
// schedule and the ten rounds (SubBytes, ShiftRows, MixColumns except in the
// last round, AddRoundKey) are unrolled, so ct follows key and pt with no
// clock. The user registers the result. Only the forward cipher is needed:
// GCM uses it in counter mode for both directions. The key length (128 bits)
// is this design's choice; the paper does not state one.
//
// Interface: key[127:0], pt[127:0] in, ct[127:0] out; byte 0 is bits [127:120].
module aes128_cipher
  import aes_pkg::*;
(
  input  logic [127:0] key,
  input  logic [127:0] pt,
  output logic [127:0] ct
);

  localparam logic [7:0] RCON [10] = '{8'h01, 8'h02, 8'h04, 8'h08, 8'h10,
                                       8'h20, 8'h40, 8'h80, 8'h1B, 8'h36};

  logic [127:0] rk    [11];
  logic [127:0] state [11];

  always_comb begin
    rk[0]    = key;
    state[0] = pt ^ key;
    for (int r = 1; r <= 10; r++) begin
      rk[r] = next_round_key(rk[r-1], RCON[r-1]);
      if (r < 10)
        state[r] = mix_columns(shift_rows(sub_bytes(state[r-1]))) ^ rk[r];
      else
        state[r] = shift_rows(sub_bytes(state[r-1])) ^ rk[r];
    end
  end

  assign ct = state[10];

endmodule
