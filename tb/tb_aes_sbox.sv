// tb_aes_sbox: checks all 256 entries of the table S-box against a
// brute-force reference, plus four published FIPS-197 entries.
module tb_aes_sbox;
  import aes_ref_pkg::*;
  logic [7:0] a, y;
  int checks = 0, failures = 0;

  aes_sbox u_dut (.a, .y);

  task automatic chk(logic [7:0] got, logic [7:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %02h exp %02h", what, got, exp);
    end
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
      a = 8'(i);
      #1;
      chk(y, sbox(8'(i)), $sformatf("S(%02h)", i));
    end
    a = 8'h00; #1 chk(y, 8'h63, "S(00) FIPS");
    a = 8'h01; #1 chk(y, 8'h7c, "S(01) FIPS");
    a = 8'h53; #1 chk(y, 8'hed, "S(53) FIPS");
    a = 8'hff; #1 chk(y, 8'h16, "S(ff) FIPS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
