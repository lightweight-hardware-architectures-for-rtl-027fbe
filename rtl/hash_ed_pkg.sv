// hash_ed_pkg: types, constants and GF(2^8) helpers shared by the
// error-detecting ECHO-256 and Fugue-256 datapaths.
//
// Byte convention: a 128-bit AES/ECHO word holds byte 0 in bits [127:120]
// and byte 15 in bits [7:0]; AES bytes are column-major (byte 4c+r is row r
// of column c).  A 32-bit Fugue word holds byte 0 in bits [31:24].
// The field polynomial x^8+x^4+x^3+x+1 is the one the AES S-box uses.
package hash_ed_pkg;

  typedef logic [7:0]   byte_t;
  typedef logic [31:0]  fword_t;     // Fugue state word S_i
  typedef logic [127:0] eword_t;     // ECHO 128-bit state word

  localparam int ECHO_ROUNDS  = 8;   // BIG rounds per Compress512

  // Fugue-256 initial value: S_0..S_21 = 0, S_22..S_29 = these words.
  localparam fword_t FUGUE256_IV [8] = '{
    32'he952bdde, 32'h6671135f, 32'he0d4f668, 32'hd2b0b594,
    32'hf96c621d, 32'hfbf929de, 32'h9149e899, 32'h34f8c248
  };

  // Operations of the Fugue linear unit (fugue_trc_ed).
  typedef enum logic [2:0] {
    F_TRC = 3'd0,   // TIX, ROR3, CMIX   (first sub-round of a round)
    F_RC  = 3'd1,   // ROR3, CMIX        (second sub-round, final G1 steps)
    F_G15 = 3'd2,   // S4+=S0, S15+=S0, ROR15  (final G2, first half)
    F_G14 = 3'd3,   // S4+=S0, S16+=S0, ROR14  (final G2, second half)
    F_FIN = 3'd4    // S4+=S0, S15+=S0   (last step before output)
  } fugue_op_e;

  // Fault-injection points (test hook; a mask of zero disables injection).
  typedef enum logic [2:0] {
    FI_NONE      = 3'd0,
    FI_AES_MC    = 3'd1,  // ECHO: MixColumns output of AES lane 0
    FI_BIG_MC    = 3'd2,  // ECHO: BIG.MixColumns output
    FI_BIG_FINAL = 3'd3,  // ECHO: BIG.Final output
    FI_CMIX      = 3'd4,  // Fugue: linear-unit output
    FI_SUPERMIX  = 3'd5   // Fugue: Super-Mix output
  } fault_site_e;

  function automatic byte_t gf_xtime(byte_t a);
    return {a[6:0], 1'b0} ^ (a[7] ? 8'h1b : 8'h00);
  endfunction

  function automatic byte_t gf_mul(byte_t a, byte_t b);
    byte_t p = '0;
    byte_t x = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) p ^= x;
      x = gf_xtime(x);
    end
    return p;
  endfunction

  // AES MixColumns on one column (r0 = top row).
  function automatic logic [31:0] aes_mixcol(logic [31:0] c);
    byte_t a0 = c[31:24], a1 = c[23:16], a2 = c[15:8], a3 = c[7:0];
    byte_t t  = a0 ^ a1 ^ a2 ^ a3;
    return {a0 ^ t ^ gf_xtime(a0 ^ a1), a1 ^ t ^ gf_xtime(a1 ^ a2),
            a2 ^ t ^ gf_xtime(a2 ^ a3), a3 ^ t ^ gf_xtime(a3 ^ a0)};
  endfunction

  // Byte-wise XOR of the bytes of a 128-bit word.
  function automatic byte_t xor_bytes128(eword_t w);
    byte_t s = '0;
    for (int i = 0; i < 16; i++) s ^= w[8*i +: 8];
    return s;
  endfunction

endpackage
