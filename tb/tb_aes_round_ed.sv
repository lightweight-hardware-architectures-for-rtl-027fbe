// tb_aes_round_ed: AES round against the FIPS-197 worked example and a
// reference model; checks that the MixColumns/AddRoundKey flag stays zero
// when fault free, fires for every single-bit fault, and fires for random
// multi-bit faults except those whose bytes cancel column-wise; also checks
// the 1-bit compressed flag.
module tb_aes_round_ed;
  import hash_ref_pkg::*;
  logic [127:0] s, k, f, o, o1;
  logic [31:0]  e32;
  logic [0:0]   e1;
  int checks = 0, failures = 0;

  aes_round_ed #(.FLAG_W(32)) dut  (.state_i(s), .key_i(k), .fault_i(f), .state_o(o),  .err_o(e32));
  aes_round_ed #(.FLAG_W(1))  dut1 (.state_i(s), .key_i(k), .fault_i(f), .state_o(o1), .err_o(e1));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit cancels(logic [127:0] m);
    for (int c = 0; c < 4; c++) begin
      bit [7:0] x = 0;
      for (int r = 0; r < 4; r++) x ^= m[127-8*(4*c+r) -: 8];
      if (x != 0) return 1'b0;
    end
    return 1'b1;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // FIPS-197 Appendix B, round 1
    s = 128'h193de3bea0f4e22b9ac68d2ae9f84808;
    k = 128'ha0fafe1788542cb123a339392a6c7605;
    f = '0;
    #1;
    chk(o == 128'ha49c7ff2689f352b6b5bea43026a5049, "FIPS-197 round 1");
    chk(e32 == 0 && e1 == 0, "no flag on KAT");
    for (int t = 0; t < 300; t++) begin
      s = {$urandom, $urandom, $urandom, $urandom};
      k = {$urandom, $urandom, $urandom, $urandom};
      f = '0;
      #1;
      chk(o == ref_aes_round(s, k) && o1 == o, $sformatf("random round %0d", t));
      chk(e32 == 0 && e1 == 0, "false alarm");
      // single-bit fault: always detected, in the right column
      f = '0;
      f[$urandom_range(127, 0)] = 1'b1;
      #1;
      chk(o == (ref_aes_round(s, k) ^ f), "fault propagates");
      chk(e32 != 0 && e1 == 1, "single-bit fault missed");
      // multi-bit fault
      f = {$urandom, $urandom, $urandom, $urandom};
      #1;
      chk((e32 != 0) == !cancels(f), "multi-bit fault flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
