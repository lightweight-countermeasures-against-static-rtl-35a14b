// tb_aes_key_expand: chains the key-expansion step over the ten round
// constants for the FIPS-197 key and checks round keys 1 and 10 against the
// published schedule, then compares single steps with the reference model on
// random keys.
module tb_aes_key_expand;
  import aes_ref_pkg::*;
  logic [127:0] kin, kout;
  logic [7:0] rc;
  int checks = 0, failures = 0;

  aes_key_expand u_dut (.key_in(kin), .rcon(rc), .key_out(kout));

  task automatic chk(logic [127:0] exp, string what);
    checks++;
    if (kout !== exp) begin
      failures++;
      $display("FAIL %s: got %032h exp %032h", what, kout, exp);
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
    logic [7:0] rcs [10] = '{8'h01, 8'h02, 8'h04, 8'h08, 8'h10, 8'h20, 8'h40, 8'h80, 8'h1b, 8'h36};
    kin = 128'h2b7e151628aed2a6abf7158809cf4f3c;
    for (int r = 0; r < 10; r++) begin
      rc = rcs[r];
      #1;
      if (r == 0) chk(128'ha0fafe1788542cb123a339392a6c7605, "FIPS round key 1");
      if (r == 9) chk(128'hd014f9a8c9ee2589e13f0cc8b6630ca6, "FIPS round key 10");
      chk(expand(kin, rc), $sformatf("chain step %0d", r + 1));
      kin = kout;
    end
    for (int i = 0; i < 300; i++) begin
      kin = rand128(); rc = 8'($urandom);
      #1 chk(expand(kin, rc), $sformatf("random %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
