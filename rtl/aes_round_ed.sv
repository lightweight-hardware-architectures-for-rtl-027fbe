// aes_round_ed: one AES round (SubBytes, ShiftRows, MixColumns,
// AddRoundKey) with concurrent error detection for the two linear steps.
//
// Because every column of the MixColumns matrix sums to 1 in GF(2^8), the
// XOR of the four bytes of a column is the same before and after
// MixColumns.  Hence, fault free,
//     E_c = sum_r ( in_{r,c} + k_{r,c} + out_{r,c} ) = 0,   c = 0..3,
// where in is the MixColumns input, k the round key and out the round
// output.  The four 8-bit E_c form a 32-bit flag (bits [8c+7:8c] = E_c);
// it is compressed to FLAG_W bits by OR-ing flag bit j into output bit
// j mod FLAG_W (FLAG_W = 32 keeps it whole, FLAG_W = 1 gives one alarm bit).
// The flag equation and its 1..32-bit compression follow the paper; the
// OR-folding used for the compression is this design's choice.
// ShiftRows is wiring and SubBytes is not covered (as in the paper).
//
// fault_i is a test hook XORed onto the MixColumns output to emulate a
// fault inside the checked logic; tie it to zero in normal use.
// Fully combinational.  Bytes are column-major, byte 0 in bits [127:120].
module aes_round_ed
  import hash_ed_pkg::*;
#(
  parameter int FLAG_W = 32
) (
  input  eword_t              state_i,
  input  eword_t              key_i,
  input  eword_t              fault_i,
  output eword_t              state_o,
  output logic [FLAG_W-1:0]   err_o
);
  eword_t sb, sr, mc;
  logic [31:0] e;

  for (genvar i = 0; i < 16; i++) begin : g_sbox
    aes_sbox u_sbox (.x_i(state_i[127-8*i -: 8]), .y_o(sb[127-8*i -: 8]));
  end

  always_comb begin
    // ShiftRows: row r of column c comes from column (c + r) mod 4.
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        sr[127-8*(4*c+r) -: 8] = sb[127-8*(4*((c+r)%4)+r) -: 8];
    for (int c = 0; c < 4; c++)
      mc[127-32*c -: 32] = aes_mixcol(sr[127-32*c -: 32]);
    mc      = mc ^ fault_i;
    state_o = mc ^ key_i;
    for (int c = 0; c < 4; c++) begin
      e[8*c +: 8] = '0;
      for (int r = 0; r < 4; r++)
        e[8*c +: 8] ^= sr[127-8*(4*c+r) -: 8] ^ key_i[127-8*(4*c+r) -: 8]
                     ^ state_o[127-8*(4*c+r) -: 8];
    end
    err_o = '0;
    for (int j = 0; j < 32; j++) err_o[j % FLAG_W] |= e[j];
  end
endmodule
