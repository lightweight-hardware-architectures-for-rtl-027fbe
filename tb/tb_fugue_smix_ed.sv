// tb_fugue_smix_ed: SMIX against the reference (table S-box, matrix N);
// checks the column sums of N behind the parity theorem (zero except
// columns 0, 5, 10, 15 = {03}); the Super-Mix parity must stay quiet fault
// free and flag every single-bit fault on the Super-Mix output.
module tb_fugue_smix_ed;
  import hash_ed_pkg::*;
  import hash_ref_pkg::*;
  fword_t       x [4], y [4];
  logic [127:0] f;
  logic         err;
  int checks = 0, failures = 0;

  fugue_smix_ed dut (.x_i(x), .fault_i(f), .y_o(y), .err_o(err));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < 16; j++) begin
      bit [7:0] cs;
      cs = 0;
      for (int i = 0; i < 16; i++) cs ^= NMAT[i][j];
      chk(cs == ((j % 5 == 0) ? 8'h03 : 8'h00), $sformatf("column %0d sums to %0h", j, cs));
    end
    for (int t = 0; t < 300; t++) begin
      bit [127:0] in_v;
      in_v = {$urandom, $urandom, $urandom, $urandom};
      for (int k = 0; k < 4; k++) x[k] = in_v[127-32*k -: 32];
      f = '0;
      #1;
      chk({y[0], y[1], y[2], y[3]} == ref_smix128(in_v), $sformatf("smix %0d", t));
      chk(!err, "false alarm");
      f[$urandom_range(127, 0)] = 1'b1;
      #1;
      chk(err, "single-bit fault missed");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
