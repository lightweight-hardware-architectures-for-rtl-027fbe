// tb_fault_campaign: stuck-at fault campaign on the five checked units,
// 20,000 faults per unit and per class (80,000 takes about four minutes;
// set N_FAULTS for that).
//
// A 32-bit external-feedback LFSR (x^32+x^22+x^2+x+1) draws random unit
// inputs, the bits to fault and their stuck values.  A stuck-at fault is
// applied through each unit's fault_i input as a flip on the chosen bits
// whose fault-free value differs from the stuck value, so a fault on a bit
// already at that value does not change anything, as with a real stuck-at
// cell.  Single faults hit one bit; multiple faults hit 2 to 17 bits of
// the same output word (of one 32-bit word for the Fugue linear unit).
// A fault whose output differs from the fault-free output is an error;
// coverage = flagged errors / errors.
// Required: 100 % for single faults on every unit and no flag without an
// error.  Multiple faults: at least 99 % for the AES-round, BIG.MixColumns
// and Fugue-signature checks; at least 95 % for the byte-wide Super-Mix
// parity and the 8-bit BIG.Final parity (two flipped bits at the same bit
// position of different bytes cancel in a byte-wide XOR); with one parity
// bit per word (PAR_W = 1) BIG.Final sees only odd-weight errors.
module tb_fault_campaign;
  import hash_ed_pkg::*;
  localparam int N_FAULTS = 20000;

  int checks = 0, failures = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  bit [31:0] lfsr = 32'hACE1_2024;
  function automatic bit [31:0] rnd();
    for (int i = 0; i < 32; i++)
      lfsr = {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    return lfsr;
  endfunction
  function automatic bit [127:0] rnd128();
    return {rnd(), rnd(), rnd(), rnd()};
  endfunction

  // stuck-at mask: nb bits (1 = single) of a width-w field
  function automatic bit [127:0] pick_bits(int nb, int w);
    bit [127:0] m = '0;
    for (int i = 0; i < nb; i++) m[rnd() % w] = 1'b1;
    return m;
  endfunction

  // ---------------- units under test
  eword_t aes_s, aes_k, aes_f, aes_o;
  logic [31:0] aes_e;
  aes_round_ed u_aes (.state_i(aes_s), .key_i(aes_k), .fault_i(aes_f), .state_o(aes_o), .err_o(aes_e));

  eword_t bm_w [16], bm_f [16], bm_o [16];
  logic [63:0] bm_e;
  echo_big_mix_ed u_bm (.w_i(bm_w), .fault_i(bm_f), .w_o(bm_o), .err_o(bm_e));

  eword_t bf_in [16], bf_a [16], bf_f [4], bf_v1 [4], bf_v8 [4];
  logic [3:0] bf_e1, bf_e8;
  echo_big_final_ed #(.PAR_W(1)) u_bf1 (.in_i(bf_in), .a_i(bf_a), .fault_i(bf_f), .v_o(bf_v1), .err_o(bf_e1));
  echo_big_final_ed #(.PAR_W(8)) u_bf8 (.in_i(bf_in), .a_i(bf_a), .fault_i(bf_f), .v_o(bf_v8), .err_o(bf_e8));

  fword_t tr_s [30], tr_f [30], tr_o [30];
  fword_t tr_m;
  fugue_op_e tr_op;
  logic tr_e;
  fugue_trc_ed u_tr (.s_i(tr_s), .m_i(tr_m), .op_i(tr_op), .fault_i(tr_f), .s_o(tr_o), .err_o(tr_e));

  fword_t sm_x [4], sm_y [4];
  logic [127:0] sm_f;
  logic sm_e;
  fugue_smix_ed u_sm (.x_i(sm_x), .fault_i(sm_f), .y_o(sm_y), .err_o(sm_e));

  // results [unit][class]: unit 0 AES, 1 BIG.MC, 2 BIG.Final P1, 3 BIG.Final P8,
  // 4 Fugue linear, 5 Super-Mix; class 0 single, 1 multiple
  int n_err [6][2], n_det [6][2], n_false [6][2];

  task automatic tally(int u, int c, bit wrong, bit flag);
    if (wrong) begin n_err[u][c]++; if (flag) n_det[u][c]++; end
    else if (flag) n_false[u][c]++;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 2; c++)
      for (int t = 0; t < N_FAULTS; t++) begin
        int nb;
        bit [127:0] bits, stuck, nom;
        nb    = (c == 0) ? 1 : 2 + int'(rnd() % 16);
        stuck = rnd128();
        // AES round
        aes_s = rnd128(); aes_k = rnd128(); aes_f = '0;
        #1 nom = aes_o;
        bits = pick_bits(nb, 128);
        aes_f = bits & (nom ^ stuck);
        #1 tally(0, c, aes_o != nom, |aes_e);
        aes_f = '0;
        // BIG.MixColumns
        begin
          int wi;
          eword_t nom_w [16];
          for (int i = 0; i < 16; i++) begin bm_w[i] = rnd128(); bm_f[i] = '0; end
          #1 nom_w = bm_o;
          wi = int'(rnd() % 16);
          bm_f[wi] = pick_bits(nb, 128) & (nom_w[wi] ^ stuck);
          #1 tally(1, c, bm_o != nom_w, |bm_e);
          bm_f[wi] = '0;
        end
        // BIG.Final, PAR_W = 1 and 8
        begin
          int wj;
          eword_t nom_v [4];
          for (int i = 0; i < 16; i++) begin bf_in[i] = rnd128(); bf_a[i] = rnd128(); end
          for (int j = 0; j < 4; j++) bf_f[j] = '0;
          #1 nom_v = bf_v1;
          wj = int'(rnd() % 4);
          bf_f[wj] = pick_bits(nb, 128) & (nom_v[wj] ^ stuck);
          #1;
          tally(2, c, bf_v1 != nom_v, |bf_e1);
          tally(3, c, bf_v8 != nom_v, |bf_e8);
          bf_f[wj] = '0;
        end
        // Fugue linear unit
        begin
          int wk;
          fword_t nom_s [30];
          for (int i = 0; i < 30; i++) begin tr_s[i] = rnd(); tr_f[i] = '0; end
          tr_m = rnd();
          tr_op = fugue_op_e'(rnd() % 5);
          #1 nom_s = tr_o;
          wk = int'(rnd() % 30);
          tr_f[wk] = 32'(pick_bits(nb, 32)) & (nom_s[wk] ^ stuck[31:0]);
          #1 tally(4, c, tr_o != nom_s, tr_e);
          tr_f[wk] = '0;
        end
        // Super-Mix
        begin
          bit [127:0] nom_y;
          for (int k = 0; k < 4; k++) sm_x[k] = rnd();
          sm_f = '0;
          #1 nom_y = {sm_y[0], sm_y[1], sm_y[2], sm_y[3]};
          sm_f = pick_bits(nb, 128) & (nom_y ^ stuck);
          #1 tally(5, c, {sm_y[0], sm_y[1], sm_y[2], sm_y[3]} != nom_y, sm_e);
        end
      end

    for (int u = 0; u < 6; u++)
      for (int c = 0; c < 2; c++)
        $display("unit %0d %s: %0d faults, %0d errors, %0d detected (%0d.%02d %%), %0d flags without error",
                 u, c ? "multiple" : "single  ", N_FAULTS, n_err[u][c], n_det[u][c],
                 n_err[u][c] ? 100 * n_det[u][c] / n_err[u][c] : 0,
                 n_err[u][c] ? (10000 * n_det[u][c] / n_err[u][c]) % 100 : 0, n_false[u][c]);
    for (int u = 0; u < 6; u++) begin
      chk(n_err[u][0] > 0 && n_det[u][0] == n_err[u][0], $sformatf("unit %0d: every single fault", u));
      chk(n_false[u][0] == 0 && n_false[u][1] == 0, $sformatf("unit %0d: no flag without an error", u));
      if (u == 0 || u == 1 || u == 4)
        chk(n_err[u][1] > 0 && 100 * n_det[u][1] >= 99 * n_err[u][1], $sformatf("unit %0d: multiple >= 99 %%", u));
      if (u == 3 || u == 5)
        chk(n_err[u][1] > 0 && 100 * n_det[u][1] >= 95 * n_err[u][1], $sformatf("unit %0d: multiple >= 95 %%", u));
    end
    // one parity bit: misses about half of the multiple faults, never all
    chk(n_det[2][1] > 0 && n_det[2][1] < n_err[2][1], "BIG.Final PAR_W=1 sees odd-weight only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
