// tb_echo_compress_ed: the ECHO-256 engine at its default size.
// Compresses a first block (IV) and a chained second block and compares
// chain_o / hash_o with the reference Compress512; checks the latency of
// 2 + 8*(32/LANES + 1) cycles from the start cycle to the done cycle; then repeats a block with
// a single-bit fault injected at each of the three checked points and
// expects the matching sticky flag (and no flag in fault-free runs).
// A second instance with HSIZE = 224 checks the IV and truncation of the
// shorter variant on the same two blocks.
module tb_echo_compress_ed;
  import hash_ed_pkg::*;
  import hash_ref_pkg::*;
  localparam int LANES = 4;
  localparam int LAT   = 2 + 8 * (32 / LANES + 1);

  logic clk = 0, rst_n = 0;
  logic start, first, busy, done, err, e_aes, e_bmc, e_fin;
  eword_t salt, cnt, msg [12], chain [4];
  logic [255:0] hash;
  fault_site_e fsite;
  logic [3:0]  fword;
  eword_t      fmask;
  int checks = 0, failures = 0;

  echo_compress_ed dut (
    .clk, .rst_n, .start_i(start), .first_i(first), .salt_i(salt), .counter_i(cnt),
    .msg_i(msg), .busy_o(busy), .done_o(done), .chain_o(chain), .hash_o(hash),
    .err_o(err), .err_aes_o(e_aes), .err_bmc_o(e_bmc), .err_fin_o(e_fin),
    .fi_site_i(fsite), .fi_word_i(fword), .fi_mask_i(fmask));

  // ECHO-224 variant (same Compress512, other IV and truncation), run in
  // step with the main instance, without fault injection
  eword_t chain224 [4];
  logic [255:0] hash224;
  logic done224;
  echo_compress_ed #(.HSIZE(224)) dut224 (
    .clk, .rst_n, .start_i(start), .first_i(first), .salt_i(salt), .counter_i(cnt),
    .msg_i(msg), .busy_o(), .done_o(done224), .chain_o(chain224), .hash_o(hash224),
    .err_o(), .err_aes_o(), .err_bmc_o(), .err_fin_o(),
    .fi_site_i(FI_NONE), .fi_word_i(4'd0), .fi_mask_i('0));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit [1535:0] pack_m();
    bit [1535:0] p;
    for (int i = 0; i < 12; i++) p[1535-128*i -: 128] = msg[i];
    return p;
  endfunction

  // Runs one block; returns the number of cycles from start to done.
  task automatic run_block(input bit is_first, output int cycles);
    @(negedge clk);
    start = 1; first = is_first;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [511:0] v_ref, v224;
    int cyc;
    start = 0; first = 0; fsite = FI_NONE; fword = 0; fmask = '0;
    salt = {$urandom, $urandom, $urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    v_ref = {4{REF_ECHO256_IV}};
    v224  = {4{8'hE0, 8'h00, 112'h0}};   // 224 as a little-endian 128-bit number
    // two chained blocks
    for (int b = 0; b < 2; b++) begin
      for (int i = 0; i < 12; i++) msg[i] = {$urandom, $urandom, $urandom, $urandom};
      cnt = 128'd1536 * (b + 1);
      v_ref = ref_echo_compress(v_ref, pack_m(), cnt, salt);
      v224  = ref_echo_compress(v224, pack_m(), cnt, salt);
      run_block(b == 0, cyc);
      chk(done224 && {chain224[0], chain224[1], chain224[2], chain224[3]} == v224,
          $sformatf("ECHO-224 block %0d chain", b));
      chk(hash224 == {v224[511:288], 32'h0}, "ECHO-224 truncation to 224 bits");
      chk({chain[0], chain[1], chain[2], chain[3]} == v_ref, $sformatf("block %0d chain", b));
      chk(hash == v_ref[511:256], "hash = v0||v1");
      chk(cyc == LAT, $sformatf("latency %0d, expected %0d", cyc, LAT));
      chk(!err, "false alarm");
    end
    // fault injection: one single-bit fault per site, held for the block
    for (int s = 1; s <= 3; s++) begin
      fsite = fault_site_e'(s);
      fword = 4'($urandom_range(15, 0));
      fmask = '0;
      fmask[$urandom_range(127, 0)] = 1'b1;
      run_block(1'b1, cyc);
      fsite = FI_NONE;
      chk(e_aes == (s == 1) && e_bmc == (s == 2) && e_fin == (s == 3) && err,
          $sformatf("site %0d flags %b%b%b", s, e_aes, e_bmc, e_fin));
    end
    // flags clear on the next fault-free block
    run_block(1'b1, cyc);
    chk(!err, "flags cleared by start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
