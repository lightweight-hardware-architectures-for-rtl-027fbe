// fugue_smix_ed: Fugue SMIX (S-box layer, then Super-Mix) on S_0..S_3 with
// the predicted parity of Super-Mix.
//
// The 16 bytes of S_0..S_3 pass the AES S-box, giving I_0..I_15 with
// I_{4k+r} = byte r of S_k (byte 0 = bits [31:24]).  Super-Mix multiplies
// this vector by the fixed 16x16 matrix N over GF(2^8) (entries as printed
// in the paper; polynomial x^8+x^4+x^3+x+1), O = N*I, and byte r of the
// new S_k is O_{4k+r}.
//
// Error detection (the paper's theorem): every column of N sums to zero
// except columns 0, 5, 10 and 15, which sum to {03}; so the byte-wise XOR of
// the sixteen outputs equals P_hat = {03}*(I_0 + I_5 + I_10 + I_15).
// err_o = (O_0 + ... + O_15 != P_hat).  The S-box layer is not covered by
// this check (as in the paper).  fault_i is a test hook XORed onto the
// Super-Mix output (zero in normal use).  Combinational, no latency.
module fugue_smix_ed
  import hash_ed_pkg::*;
(
  input  fword_t          x_i [4],
  input  logic [127:0]    fault_i,
  output fword_t          y_o [4],
  output logic            err_o
);
  // Rows of N, one hex digit per entry, column 0 in the leftmost digit.
  localparam logic [63:0] N_ROWS [16] = '{
    64'h1471_1000_1000_1000, 64'h0100_1147_0100_0100,
    64'h0010_0010_7114_0010, 64'h0001_0001_0001_4711,
    64'h0000_0471_1000_1000, 64'h0100_0000_1047_0100,
    64'h0010_0010_0000_7104, 64'h4710_0001_0001_0000,
    64'h0000_7000_6471_7000, 64'h0700_0000_0700_1647,
    64'h7164_0070_0000_0070, 64'h0007_4716_0007_0000,
    64'h0000_4000_4000_5471, 64'h1547_0000_0400_0400,
    64'h0040_7154_0000_0040, 64'h0004_0004_4715_0000
  };

  byte_t in_b  [16];
  byte_t sb    [16];
  byte_t o     [16];
  byte_t o_sum, p_hat;

  always_comb
    for (int k = 0; k < 4; k++)
      for (int r = 0; r < 4; r++)
        in_b[4*k + r] = x_i[k][31-8*r -: 8];

  for (genvar i = 0; i < 16; i++) begin : g_sbox
    aes_sbox u_sbox (.x_i(in_b[i]), .y_o(sb[i]));
  end

  always_comb begin
    for (int i = 0; i < 16; i++) begin
      o[i] = '0;
      for (int j = 0; j < 16; j++)
        o[i] ^= gf_mul(sb[j], {4'h0, N_ROWS[i][63-4*j -: 4]});
      o[i] ^= fault_i[127-8*i -: 8];
    end
    for (int k = 0; k < 4; k++)
      y_o[k] = {o[4*k], o[4*k+1], o[4*k+2], o[4*k+3]};
    o_sum = '0;
    for (int i = 0; i < 16; i++) o_sum ^= o[i];
    // {03}*t computed as t + x*t mod M(x), as the proof of the theorem notes
    p_hat = (sb[0] ^ sb[5] ^ sb[10] ^ sb[15]) ^ gf_xtime(sb[0] ^ sb[5] ^ sb[10] ^ sb[15]);
    err_o = (o_sum != p_hat);
  end
endmodule
