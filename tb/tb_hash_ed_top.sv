// tb_hash_ed_top: end-to-end test of hash_ed_top at its default parameters.
//
// Phase 1 (both engines at once): ECHO-256 compresses three chained blocks
// (IV, chained, chained, the last started back-to-back in the done cycle of
// the one before) while Fugue-256 hashes a padded 6-word message with idle
// gaps between words; results are compared with the reference models, with
// the cycle counts (74 per ECHO block, 2 per Fugue word, 32 for the final
// stage) and with a quiet alarm.
// Phase 2 (fault campaign): a 32-bit external-feedback LFSR picks, per run,
// the checked point, the word, a multi-bit flip mask and the single cycle in
// which the fault is present (a transient fault).  A run whose result
// differs from the reference is a real error.  Half of the runs flip one
// bit: all of those must be detected.  The others flip many bits: the
// column and byte signatures must catch at least 99 % of them, while the
// single parity bit per word at BIG.Final only sees odd-weight errors,
// so its multi-bit coverage (about one half) is only reported.
// Each mechanism is counted and a failure is counted for any that never
// happened.
module tb_hash_ed_top;
  import hash_ed_pkg::*;
  import hash_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic echo_start, echo_first, echo_busy, echo_done, e_aes, e_bmc, e_fin;
  eword_t echo_salt, echo_cnt, echo_msg [12], echo_chain [4];
  logic [255:0] echo_hash, fugue_hash;
  logic fugue_init, fugue_mv, fugue_mr, fugue_fin, fugue_busy, fugue_done, e_trc, e_sm;
  fword_t fugue_m;
  logic alarm;
  fault_site_e fsite;
  logic [4:0]   fword;
  logic [127:0] fmask;

  int checks = 0, failures = 0;
  // mechanism counters
  int n_echo_first, n_echo_chain, n_echo_b2b, n_fugue_stall, n_fugue_final, n_concurrent;
  int n_det [6];
  int real_err, detected, undetected, masked_alarm;
  int s_err, s_det, m_err [6], m_det [6];

  hash_ed_top dut (
    .clk, .rst_n,
    .echo_start_i(echo_start), .echo_first_i(echo_first), .echo_salt_i(echo_salt),
    .echo_counter_i(echo_cnt), .echo_msg_i(echo_msg), .echo_busy_o(echo_busy),
    .echo_done_o(echo_done), .echo_chain_o(echo_chain), .echo_hash_o(echo_hash),
    .echo_err_aes_o(e_aes), .echo_err_bmc_o(e_bmc), .echo_err_fin_o(e_fin),
    .fugue_init_i(fugue_init), .fugue_m_valid_i(fugue_mv), .fugue_m_ready_o(fugue_mr),
    .fugue_m_i(fugue_m), .fugue_final_i(fugue_fin), .fugue_busy_o(fugue_busy),
    .fugue_done_o(fugue_done), .fugue_hash_o(fugue_hash),
    .fugue_err_trc_o(e_trc), .fugue_err_sm_o(e_sm),
    .alarm_o(alarm), .fi_site_i(fsite), .fi_word_i(fword), .fi_mask_i(fmask));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // external-feedback LFSR, x^32 + x^22 + x^2 + x + 1
  bit [31:0] lfsr = 32'h1234_5678;
  function automatic bit [31:0] lfsr_next();
    for (int i = 0; i < 32; i++)
      lfsr = {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
    return lfsr;
  endfunction

  function automatic bit [1535:0] pack_m();
    bit [1535:0] p;
    for (int i = 0; i < 12; i++) p[1535-128*i -: 128] = echo_msg[i];
    return p;
  endfunction

  // ECHO: run one block, optionally with a one-cycle fault at cycle fcyc.
  task automatic echo_block(input bit first, input int fcyc, input fault_site_e fs,
                            input logic [4:0] fw_i, input logic [127:0] fm, output int cyc);
    echo_start = 1; echo_first = first;
    @(negedge clk);
    echo_start = 0;
    cyc = 1;
    while (!echo_done) begin
      if (cyc == fcyc) begin fsite = fs; fword = fw_i; fmask = fm; end
      @(negedge clk);
      fsite = FI_NONE; fmask = '0;
      cyc++;
    end
  endtask

  // Fugue: hash words w (already padded); optional one-cycle fault.
  task automatic fugue_hash_run(input fword_t w [$], input bit gaps, input int fcyc,
                                input fault_site_e fs, input logic [4:0] fw_i,
                                input logic [127:0] fm);
    int cyc = 0, k;
    @(negedge clk); fugue_init = 1;
    @(negedge clk); fugue_init = 0;
    foreach (w[i]) begin
      if (gaps && i % 3 == 2) begin
        n_fugue_stall++;
        repeat (1 + i % 2) begin @(negedge clk); cyc++; end
      end
      fugue_m = w[i]; fugue_mv = 1;
      if (cyc == fcyc) begin fsite = fs; fword = fw_i; fmask = fm; end
      @(negedge clk); fugue_mv = 0; fsite = FI_NONE; fmask = '0; cyc++;
      k = 1;
      while (!fugue_mr) begin
        if (cyc == fcyc) begin fsite = fs; fword = fw_i; fmask = fm; end
        @(negedge clk); fsite = FI_NONE; fmask = '0; cyc++; k++;
      end
      chk(k == 2, "Fugue word rate");
    end
    fugue_fin = 1;
    k = 0;
    do begin
      if (cyc == fcyc) begin fsite = fs; fword = fw_i; fmask = fm; end
      @(negedge clk); fugue_fin = 0; fsite = FI_NONE; fmask = '0; cyc++; k++;
    end while (!fugue_done);
    chk(k == 32, $sformatf("Fugue final stage %0d cycles", k));
    n_fugue_final++;
  endtask

  function automatic bit [255:0] fugue_ref(fword_t w [$]);
    bit [959:0] s = ref_fugue_iv();
    foreach (w[i]) s = ref_fugue_word(s, w[i]);
    return ref_fugue_final(s);
  endfunction

  function automatic void pad_msg(ref fword_t w [$], input int n);
    w = {};
    for (int i = 0; i < n; i++) w.push_back(lfsr_next());
    w.push_back(32'((longint'(32 * n)) >> 32));
    w.push_back(32'(32 * n));
  endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [511:0] v_ref;
    fword_t fw_q [$];
    int cyc;
    echo_start = 0; echo_first = 0; fugue_init = 0; fugue_mv = 0; fugue_fin = 0;
    fugue_m = 0; fsite = FI_NONE; fword = 0; fmask = '0;
    echo_salt = {lfsr_next(), lfsr_next(), lfsr_next(), lfsr_next()};
    echo_cnt = '0;
    foreach (echo_msg[i]) echo_msg[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------- phase 1: both engines concurrently
    pad_msg(fw_q, 6);
    fork
      begin : echo_side
        v_ref = {4{REF_ECHO256_IV}};
        for (int b = 0; b < 3; b++) begin
          for (int i = 0; i < 12; i++)
            echo_msg[i] = {lfsr_next(), lfsr_next(), lfsr_next(), lfsr_next()};
          echo_cnt = 128'(1536 * (b + 1));
          v_ref = ref_echo_compress(v_ref, pack_m(), echo_cnt, echo_salt);
          if (fugue_busy || !fugue_mr) n_concurrent++;
          echo_block(b == 0, -1, FI_NONE, 0, '0, cyc);
          if (b == 0) n_echo_first++; else n_echo_chain++;
          if (b == 2) n_echo_b2b++;
          chk(cyc == 74, $sformatf("ECHO block %0d took %0d cycles", b, cyc));
          chk({echo_chain[0], echo_chain[1], echo_chain[2], echo_chain[3]} == v_ref,
              $sformatf("ECHO chain after block %0d", b));
          chk(echo_hash == v_ref[511:256], "ECHO hash");
          // block 2 starts in the done cycle of block 1 (back to back)
          if (b == 0) @(negedge clk);
        end
      end
      begin : fugue_side
        fugue_hash_run(fw_q, 1'b1, -1, FI_NONE, 0, '0);
        chk(fugue_hash == fugue_ref(fw_q), "Fugue hash");
      end
    join
    chk(!alarm, "no alarm without faults");

    // ---------------- phase 2: LFSR fault campaign
    for (int run = 0; run < 200; run++) begin
      bit [31:0] r;
      bit is_echo;
      fault_site_e fs;
      logic [127:0] fm;
      logic [4:0] fwi;
      int fcyc;
      bit wrong, det, single;
      r = lfsr_next();
      is_echo = r[0];
      fm = {lfsr_next(), lfsr_next(), lfsr_next(), lfsr_next()};
      // half of the runs flip a single bit, the others many bits
      single = r[1];
      if (single) begin
        fm = '0;
        fm[r[31:25]] = 1'b1;
      end
      if (is_echo) begin
        fs   = fault_site_e'(1 + r[3:2] % 3);
        fwi  = 5'(r[8:5] % 16);
        // cycle 9k (k = 1..8) is a BIG.MixColumns cycle, cycle 73 BIG.Final
        case (fs)
          FI_BIG_MC:    fcyc = 9 * (1 + int'(r[14:12]));
          FI_BIG_FINAL: fcyc = 73;
          default:      fcyc = 1 + int'(r[20:12]) % 72;
        endcase
        for (int i = 0; i < 12; i++)
          echo_msg[i] = {lfsr_next(), lfsr_next(), lfsr_next(), lfsr_next()};
        echo_cnt = 128'(1536);
        v_ref = ref_echo_compress({4{REF_ECHO256_IV}}, pack_m(), echo_cnt, echo_salt);
        echo_block(1'b1, fcyc, fs, fwi, fm, cyc);
        wrong = {echo_chain[0], echo_chain[1], echo_chain[2], echo_chain[3]} != v_ref;
        det   = e_aes | e_bmc | e_fin;
        if (e_aes) n_det[1]++;
        if (e_bmc) n_det[2]++;
        if (e_fin) n_det[3]++;
      end else begin
        fs   = r[2] ? FI_CMIX : FI_SUPERMIX;
        fwi  = 5'(r[8:4] % 30);
        if (fs == FI_CMIX) fm = single ? (128'(1) << r[29:25]) : {96'h0, fm[31:0]};
        fcyc = int'(r[20:12]) % 40;
        pad_msg(fw_q, 3);
        fugue_hash_run(fw_q, 1'b0, fcyc, fs, fwi, fm);
        wrong = fugue_hash != fugue_ref(fw_q);
        det   = e_trc | e_sm;
        if (e_trc) n_det[4]++;
        if (e_sm)  n_det[5]++;
      end
      chk(alarm == (e_aes | e_bmc | e_fin | e_trc | e_sm), "alarm is the OR of the flags");
      if (wrong) begin
        real_err++;
        if (det) detected++; else undetected++;
        if (single) begin s_err++; s_det += det; end
        else begin m_err[fs]++; m_det[fs] += det; end
      end else if (det) masked_alarm++;
    end
    $display("fault campaign: %0d erroneous results, %0d detected, %0d undetected, %0d alarms with a correct result",
             real_err, detected, undetected, masked_alarm);
    $display("single-bit faults: %0d erroneous, %0d detected", s_err, s_det);
    for (int i = 1; i <= 5; i++)
      $display("multi-bit faults at point %0d: %0d erroneous, %0d detected", i, m_err[i], m_det[i]);
    chk(s_err > 0 && s_det == s_err, "every single-bit fault detected");
    // multi-bit: the column/byte signatures miss only cancelling patterns;
    // one parity bit per BIG.Final word misses every even-weight error.
    for (int i = 1; i <= 5; i++)
      if (i != 3) chk(m_det[i] * 100 >= m_err[i] * 99, $sformatf("multi-bit coverage at point %0d", i));
    chk(m_err[3] == 0 || m_det[3] > 0, "BIG.Final parity sees odd-weight errors");

    // ---------------- mechanism census
    $display("mechanisms: echo_first=%0d echo_chain=%0d echo_back_to_back=%0d fugue_stall=%0d fugue_final=%0d concurrent=%0d",
             n_echo_first, n_echo_chain, n_echo_b2b, n_fugue_stall, n_fugue_final, n_concurrent);
    $display("detections: aes_mc=%0d big_mc=%0d big_final=%0d fugue_sig=%0d fugue_supermix=%0d",
             n_det[1], n_det[2], n_det[3], n_det[4], n_det[5]);
    chk(n_echo_first > 0, "ECHO first block");
    chk(n_echo_chain > 0, "ECHO chained block");
    chk(n_echo_b2b > 0, "ECHO back-to-back start");
    chk(n_fugue_stall > 0, "Fugue input stall");
    chk(n_fugue_final > 0, "Fugue final stage");
    chk(n_concurrent > 0, "both engines busy together");
    for (int i = 1; i <= 5; i++) chk(n_det[i] > 0, $sformatf("detector %0d fired", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
