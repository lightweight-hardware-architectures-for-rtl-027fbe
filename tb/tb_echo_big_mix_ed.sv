// tb_echo_big_mix_ed: BIG.ShiftRows + BIG.MixColumns against the reference
// model; the 64 column flags must stay clear fault free, and a single-bit
// fault must raise exactly the flag of the column it hits
// (column 16*j + b for byte b of a word in word-column j).
module tb_echo_big_mix_ed;
  import hash_ed_pkg::*;
  import hash_ref_pkg::*;
  eword_t      w [16], f [16], o [16];
  logic [63:0] err;
  int checks = 0, failures = 0;

  echo_big_mix_ed dut (.w_i(w), .fault_i(f), .w_o(o), .err_o(err));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit [2047:0] pack(eword_t a [16]);
    bit [2047:0] p;
    for (int i = 0; i < 16; i++) p[2047-128*i -: 128] = a[i];
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
    for (int t = 0; t < 100; t++) begin
      bit [2047:0] exp;
      int wi, bi;
      for (int i = 0; i < 16; i++) begin
        w[i] = {$urandom, $urandom, $urandom, $urandom};
        f[i] = '0;
      end
      #1;
      exp = ref_big_mix(pack(w));
      chk(pack(o) == exp, $sformatf("BIG round %0d", t));
      chk(err == 0, "false alarm");
      wi = $urandom_range(15, 0);
      bi = $urandom_range(127, 0);
      f[wi][bi] = 1'b1;
      #1;
      chk(err == (64'd1 << (16 * (wi / 4) + (15 - bi / 8))),
          $sformatf("flag for word %0d bit %0d: %h", wi, bi, err));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
