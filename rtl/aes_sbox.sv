// aes_sbox: the AES S-box, computed rather than tabulated.
//
// The input X in GF(2^8) (polynomial x^8+x^4+x^3+x+1) is inverted as
// X^254 = X^2 * X^4 * ... * X^128 (0 maps to 0), and the affine
// transformation b_i = a_i + a_{i+4} + a_{i+5} + a_{i+6} + a_{i+7} + {63}_i
// follows.  Purely combinational, no latency.
// The inversion-then-affine structure is the one the paper describes; it
// names composite-field and LUT realisations as options and leaves the
// choice open, so this design uses the plainest correct form (power chain
// in the binary field) rather than a composite-field circuit.
module aes_sbox
  import hash_ed_pkg::*;
(
  input  byte_t x_i,
  output byte_t y_o
);
  byte_t sq [8];   // sq[k] = X^(2^k)
  byte_t inv;

  always_comb begin
    sq[0] = x_i;
    for (int k = 1; k < 8; k++) sq[k] = gf_mul(sq[k-1], sq[k-1]);
    inv = sq[1];
    for (int k = 2; k < 8; k++) inv = gf_mul(inv, sq[k]);
    for (int i = 0; i < 8; i++)
      y_o[i] = inv[i] ^ inv[(i+4)%8] ^ inv[(i+5)%8] ^ inv[(i+6)%8] ^ inv[(i+7)%8];
    y_o = y_o ^ 8'h63;
  end
endmodule
