// echo_big_mix_ed: ECHO BIG.ShiftRows followed by BIG.MixColumns, with the
// column-signature error flags of BIG.MixColumns.
//
// The 2048-bit state is 16 words of 128 bits, word index 4*col + row.
// BIG.ShiftRows moves the word at (row r, col c) from (row r, col c+r mod 4);
// it is a permutation, so it is checked by construction (wiring) only.
// BIG.MixColumns views the state as a 4-row, 64-column byte matrix (column
// 16*j + b holds byte b of words 4j..4j+3) and multiplies every column by the
// AES MixColumns matrix.  Since each MixColumns column sums to 1, the flag
//     E_c = sum_r ( in_{r,c} + out_{r,c} ),  c = 0..63
// is zero when fault free; err_o[c] is the OR of the 8 bits of E_c.
// The flag equation is the paper's (Eq. 1); reporting one bit per column is
// this design's choice.  fault_i is a test hook XORed onto the BIG.MixColumns
// output (zero in normal use).  Combinational, no latency.
module echo_big_mix_ed
  import hash_ed_pkg::*;
(
  input  eword_t       w_i     [16],
  input  eword_t       fault_i [16],
  output eword_t       w_o     [16],
  output logic [63:0]  err_o
);
  eword_t sr [16];

  always_comb begin
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sr[4*c + r] = w_i[4*((c + r) % 4) + r];
    for (int j = 0; j < 4; j++)
      for (int b = 0; b < 16; b++)
        {w_o[4*j][127-8*b -: 8], w_o[4*j+1][127-8*b -: 8],
         w_o[4*j+2][127-8*b -: 8], w_o[4*j+3][127-8*b -: 8]} =
          aes_mixcol({sr[4*j][127-8*b -: 8], sr[4*j+1][127-8*b -: 8],
                      sr[4*j+2][127-8*b -: 8], sr[4*j+3][127-8*b -: 8]});
    for (int i = 0; i < 16; i++) w_o[i] = w_o[i] ^ fault_i[i];
    for (int j = 0; j < 4; j++)
      for (int b = 0; b < 16; b++) begin
        byte_t e;
        e = '0;
        for (int r = 0; r < 4; r++)
          e ^= sr[4*j+r][127-8*b -: 8] ^ w_o[4*j+r][127-8*b -: 8];
        err_o[16*j + b] = |e;
      end
  end
endmodule
