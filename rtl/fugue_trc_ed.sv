// fugue_trc_ed: the linear part of a Fugue-256 step with word-wide
// signature checking.
//
// op_i selects what is applied to the 30-word state S_0..S_29:
//   F_TRC : TIX(m), ROR3, CMIX      (first sub-round of a round)
//   F_RC  : ROR3, CMIX              (second sub-round; first final stage)
//   F_G15 : S4+=S0, S15+=S0, ROR15  (second final stage, first half)
//   F_G14 : S4+=S0, S16+=S0, ROR14  (second final stage, second half)
//   F_FIN : S4+=S0, S15+=S0         (last step before the output)
// TIX: S10+=S0, S0=m, S8+=m, S1+=S24.  RORn: S_i takes S_{i-n mod 30}.
// CMIX: S0+=S4, S1+=S5, S2+=S6, S15+=S4, S16+=S5, S17+=S6.  "+" is XOR.
//
// Error detection: the signature sigma(S) = S_0 + ... + S_29 (32 bits).
// Following the paper's theorem, TIX+ROR3+CMIX change it by exactly S_24
// of the input, so sigma_hat = sigma(S_in) + S_24 for F_TRC.  The same
// argument shows the other operations (rotations and the pairwise
// S_0 additions) keep sigma unchanged; applying the check to them is this
// design's extension.  err_o = (sigma(S_out) != sigma_hat).
// fault_i is a test hook XORed onto the output words (zero in normal use).
// Combinational, no latency.
module fugue_trc_ed
  import hash_ed_pkg::*;
(
  input  fword_t     s_i     [30],
  input  fword_t     m_i,
  input  fugue_op_e  op_i,
  input  fword_t     fault_i [30],
  output fword_t     s_o     [30],
  output logic       err_o
);
  fword_t t [30];
  fword_t r [30];
  fword_t sig_in, sig_out, sig_hat;

  function automatic void ror(input fword_t a [30], input int n, output fword_t b [30]);
    for (int i = 0; i < 30; i++) b[i] = a[(i + 30 - n) % 30];
  endfunction

  always_comb begin
    t = s_i;
    r = s_i;
    unique case (op_i)
      F_TRC, F_RC: begin
        if (op_i == F_TRC) begin
          t[10] = t[10] ^ t[0];
          t[0]  = m_i;
          t[8]  = t[8] ^ m_i;
          t[1]  = t[1] ^ s_i[24];
        end
        ror(t, 3, r);
        r[0]  = r[0]  ^ r[4];
        r[1]  = r[1]  ^ r[5];
        r[2]  = r[2]  ^ r[6];
        r[15] = r[15] ^ r[4];
        r[16] = r[16] ^ r[5];
        r[17] = r[17] ^ r[6];
      end
      F_G15: begin
        t[4]  = t[4]  ^ t[0];
        t[15] = t[15] ^ t[0];
        ror(t, 15, r);
      end
      F_G14: begin
        t[4]  = t[4]  ^ t[0];
        t[16] = t[16] ^ t[0];
        ror(t, 14, r);
      end
      F_FIN: begin
        r[4]  = s_i[4]  ^ s_i[0];
        r[15] = s_i[15] ^ s_i[0];
      end
      default: r = s_i;
    endcase
    for (int i = 0; i < 30; i++) s_o[i] = r[i] ^ fault_i[i];

    sig_in  = '0;
    sig_out = '0;
    for (int i = 0; i < 30; i++) begin
      sig_in  ^= s_i[i];
      sig_out ^= s_o[i];
    end
    sig_hat = sig_in ^ ((op_i == F_TRC) ? s_i[24] : '0);
    err_o   = (sig_out != sig_hat);
  end
endmodule
