// tb_fugue_trc_ed: every operation of the Fugue linear unit against the
// reference steps; the signature check stays quiet fault free and flags
// every single-bit fault on any output word.
module tb_fugue_trc_ed;
  import hash_ed_pkg::*;
  import hash_ref_pkg::*;
  fword_t    s [30], f [30], o [30];
  fword_t    m;
  fugue_op_e op;
  logic      err;
  int checks = 0, failures = 0;

  fugue_trc_ed dut (.s_i(s), .m_i(m), .op_i(op), .fault_i(f), .s_o(o), .err_o(err));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit [959:0] pack(fword_t a [30]);
    bit [959:0] p;
    for (int i = 0; i < 30; i++) p[959-32*i -: 32] = a[i];
    return p;
  endfunction

  function automatic bit [959:0] model(bit [959:0] x, fugue_op_e p, bit [31:0] mm);
    case (p)
      F_TRC: return fcmix(fror(ftix(x, mm), 3));
      F_RC:  return fcmix(fror(x, 3));
      F_G15: begin
        x = fset(x, 4, fw(x, 4) ^ fw(x, 0));
        x = fset(x, 15, fw(x, 15) ^ fw(x, 0));
        return fror(x, 15);
      end
      F_G14: begin
        x = fset(x, 4, fw(x, 4) ^ fw(x, 0));
        x = fset(x, 16, fw(x, 16) ^ fw(x, 0));
        return fror(x, 14);
      end
      default: begin
        x = fset(x, 4, fw(x, 4) ^ fw(x, 0));
        x = fset(x, 15, fw(x, 15) ^ fw(x, 0));
        return x;
      end
    endcase
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 250; t++) begin
      op = fugue_op_e'(t % 5);
      m  = $urandom;
      for (int i = 0; i < 30; i++) begin s[i] = $urandom; f[i] = '0; end
      #1;
      chk(pack(o) == model(pack(s), op, m), $sformatf("op %0d test %0d", op, t));
      chk(!err, "false alarm");
      f[$urandom_range(29, 0)][$urandom_range(31, 0)] = 1'b1;
      #1;
      chk(err, "single-bit fault missed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
