// tb_fugue_core_ed: Fugue-256 engine.  Hashes messages of 0, 1 and 5
// padded words (the caller's padding is done here), with idle gaps between
// words, and compares hash_o with the reference model; checks two cycles
// per word (m_ready_o returns two cycles after a word is taken) and 32
// cycles for the final stage; then hashes with a single-bit fault at each
// checked point and expects the matching sticky flag.
module tb_fugue_core_ed;
  import hash_ed_pkg::*;
  import hash_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  logic init, mv, mr, fin, busy, done, err, e_trc, e_sm;
  fword_t m;
  logic [255:0] hash;
  fault_site_e fsite;
  logic [4:0]  fword;
  logic [127:0] fmask;
  int checks = 0, failures = 0;

  fugue_core_ed dut (
    .clk, .rst_n, .init_i(init), .m_valid_i(mv), .m_ready_o(mr), .m_i(m),
    .final_i(fin), .busy_o(busy), .done_o(done), .hash_o(hash), .err_o(err),
    .err_trc_o(e_trc), .err_sm_o(e_sm),
    .fi_site_i(fsite), .fi_word_i(fword), .fi_mask_i(fmask));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // Hash n random words (n = 0..), padded with a 64-bit bit length.
  task automatic hash_msg(input int n, input bit gaps, output bit [255:0] exp);
    bit [959:0] s = ref_fugue_iv();
    fword_t w [$];
    int cyc;
    for (int i = 0; i < n; i++) w.push_back($urandom);
    w.push_back(32'((longint'(32 * n)) >> 32));
    w.push_back(32'(32 * n));
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    foreach (w[i]) begin
      s = ref_fugue_word(s, w[i]);
      if (gaps && (i % 2 == 1)) repeat (2) @(negedge clk);
      chk(mr, "ready between words");
      m = w[i]; mv = 1;
      @(negedge clk); mv = 0;
      cyc = 1;
      while (!mr) begin @(negedge clk); cyc++; end
      chk(cyc == 2, $sformatf("word took %0d cycles", cyc));
    end
    fin = 1;
    @(negedge clk); fin = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(cyc == 32, $sformatf("final stage took %0d cycles", cyc));
    exp = ref_fugue_final(s);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [255:0] exp;
    init = 0; mv = 0; fin = 0; m = 0; fsite = FI_NONE; fword = 0; fmask = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      int n = (k == 0) ? 0 : (k == 1) ? 1 : 5;
      hash_msg(n, k == 2, exp);
      chk(hash == exp, $sformatf("hash of %0d words: %h exp %h", n, hash, exp));
      chk(!err, "false alarm");
    end
    fsite = FI_CMIX; fword = 5'($urandom_range(29, 0)); fmask = 128'(1) << $urandom_range(31, 0);
    hash_msg(2, 0, exp);
    chk(e_trc && !e_sm, "linear-unit fault flagged by signature");
    fsite = FI_SUPERMIX; fmask = 128'(1) << $urandom_range(127, 0);
    hash_msg(2, 0, exp);
    chk(e_sm, "Super-Mix fault flagged by parity");
    fsite = FI_NONE;
    hash_msg(1, 0, exp);
    chk(!err && hash == exp, "flags cleared by init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
