// tb_echo_big_final_ed: BIG.Final against the reference model; parity
// prediction stays quiet fault free and flags every single-bit fault (and
// every odd-weight fault) on the word it hits; also runs PAR_W = 8.
module tb_echo_big_final_ed;
  import hash_ed_pkg::*;
  import hash_ref_pkg::*;
  eword_t     in_w [16], a [16], f [4], v [4], v8 [4];
  logic [3:0] err, err8;
  int checks = 0, failures = 0;

  echo_big_final_ed              dut  (.in_i(in_w), .a_i(a), .fault_i(f), .v_o(v),  .err_o(err));
  echo_big_final_ed #(.PAR_W(8)) dut8 (.in_i(in_w), .a_i(a), .fault_i(f), .v_o(v8), .err_o(err8));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit [2047:0] pack(eword_t x [16]);
    bit [2047:0] p;
    for (int i = 0; i < 16; i++) p[2047-128*i -: 128] = x[i];
    return p;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      bit [511:0] exp;
      int wj;
      for (int i = 0; i < 16; i++) begin
        in_w[i] = {$urandom, $urandom, $urandom, $urandom};
        a[i]    = {$urandom, $urandom, $urandom, $urandom};
      end
      for (int j = 0; j < 4; j++) f[j] = '0;
      #1;
      exp = ref_big_final(pack(in_w), pack(a));
      chk({v[0], v[1], v[2], v[3]} == exp && {v8[0], v8[1], v8[2], v8[3]} == exp,
          $sformatf("final %0d", t));
      chk(err == 0 && err8 == 0, "false alarm");
      wj = $urandom_range(3, 0);
      f[wj][$urandom_range(127, 0)] = 1'b1;
      #1;
      chk(err == 4'(1 << wj) && err8 == 4'(1 << wj), "single-bit fault");
      // three flipped bits: odd weight, the single parity must see it
      f[wj] = '0;
      f[wj][3] = 1'b1; f[wj][64] = 1'b1; f[wj][100] = 1'b1;
      #1;
      chk(err == 4'(1 << wj), "odd-weight fault");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
