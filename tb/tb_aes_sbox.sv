// tb_aes_sbox: exhaustive check of the computed AES S-box against a
// log/antilog-table model and a few published S-box values.
module tb_aes_sbox;
  import hash_ref_pkg::*;
  logic [7:0] x, y;
  int checks = 0, failures = 0;

  aes_sbox dut (.x_i(x), .y_o(y));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      x = 8'(i);
      #1;
      chk(y == ref_sbox(8'(i)), $sformatf("S(%02h)=%02h exp %02h", i, y, ref_sbox(8'(i))));
    end
    // FIPS-197 values
    x = 8'h00; #1 chk(y == 8'h63, "S(00)");
    x = 8'h01; #1 chk(y == 8'h7c, "S(01)");
    x = 8'h53; #1 chk(y == 8'hed, "S(53)");
    x = 8'hff; #1 chk(y == 8'h16, "S(ff)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
