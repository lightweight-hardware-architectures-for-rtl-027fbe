// echo_big_final_ed: ECHO BIG.Final for Compress512 with predicted parities.
//
// New chaining value, word j = 0..3 (row j of the 4x4 word state):
//     v_i^j = v_{i-1}^j + m^j + m^{j+4} + m^{j+8}
//           + A^j + A^{j+4} + A^{j+8} + A^{j+12}
// where (v_{i-1}, m^0..m^11) is the state that entered the compression
// (words 0..15 of in_i) and A^0..A^15 the output of the eighth BIG.MixColumns.
// Parity is linear, so the parity of v_i^j is predicted from the parities of
// the sixteen inputs it depends on, each computed on its own, and compared
// with the parity of the computed v_i^j.  PAR_W parity bits are kept per
// word: parity bit k covers the bits whose index is k mod PAR_W (PAR_W = 1
// is the single parity of the paper's lemma; larger values are the
// "multiple parities on selected bits" the paper mentions).
// err_o[j] flags a mismatch on word j.  fault_i is a test hook XORed onto
// the computed v_i (zero in normal use).  Combinational, no latency.
module echo_big_final_ed
  import hash_ed_pkg::*;
#(
  parameter int PAR_W = 1
) (
  input  eword_t      in_i    [16],
  input  eword_t      a_i     [16],
  input  eword_t      fault_i [4],
  output eword_t      v_o     [4],
  output logic [3:0]  err_o
);
  logic [PAR_W-1:0] p_in [16];   // parity of each input-state word
  logic [PAR_W-1:0] p_a  [16];   // parity of each BIG.MixColumns output word
  logic [PAR_W-1:0] p_v  [4];    // parity of each computed chaining word

  function automatic logic [PAR_W-1:0] par(eword_t w);
    logic [PAR_W-1:0] p = '0;
    for (int b = 0; b < 128; b++) p[b % PAR_W] ^= w[b];
    return p;
  endfunction

  for (genvar i = 0; i < 16; i++) begin : g_par_in
    always_comb begin
      p_in[i] = par(in_i[i]);
      p_a[i]  = par(a_i[i]);
    end
  end

  for (genvar j = 0; j < 4; j++) begin : g_word
    logic [PAR_W-1:0] p_hat;
    always_comb begin
      v_o[j] = in_i[j] ^ in_i[j+4] ^ in_i[j+8] ^ in_i[j+12]
             ^ a_i[j] ^ a_i[j+4] ^ a_i[j+8] ^ a_i[j+12] ^ fault_i[j];
      p_v[j] = par(v_o[j]);
      p_hat  = p_in[j] ^ p_in[j+4] ^ p_in[j+8] ^ p_in[j+12]
             ^ p_a[j]  ^ p_a[j+4]  ^ p_a[j+8]  ^ p_a[j+12];
      err_o[j] = |(p_hat ^ p_v[j]);
    end
  end
endmodule
