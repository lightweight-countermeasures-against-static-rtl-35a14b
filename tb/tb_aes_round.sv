// tb_aes_round: checks the combinational round against the FIPS-197
// Appendix B round-1 values and against the reference model on random states
// and keys, with and without MixColumns (the final round is also covered end
// to end by the FIPS-197 ciphertexts in the core's testbench).
module tb_aes_round;
  import aes_ref_pkg::*;
  logic [127:0] st, rk, out;
  logic fin;
  int checks = 0, failures = 0;

  aes_round u_dut (.state_in(st), .round_key(rk), .final_round(fin), .state_out(out));

  task automatic chk(logic [127:0] exp, string what);
    checks++;
    if (out !== exp) begin
      failures++;
      $display("FAIL %s: got %032h exp %032h", what, out, exp);
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
    st = 128'h193de3bea0f4e22b9ac68d2ae9f84808;
    rk = 128'ha0fafe1788542cb123a339392a6c7605;
    fin = 0; #1 chk(128'ha49c7ff2689f352b6b5bea43026a5049, "FIPS round 1");
    for (int i = 0; i < 400; i++) begin
      st = rand128(); rk = rand128(); fin = i[0];
      #1 chk(round(st, rk, fin), $sformatf("random %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
