// tb_spsc_aes_top: end-to-end test of the protected AES-128 core at its
// default parameters (64 two-path primitives in bytes 1, 2, 4, 7, 8, 11, 13,
// 14; 32-bit CTL generator).
//
// It encrypts the FIPS-197 Appendix B and C.1 vectors and random key and
// plaintext pairs, compares every ciphertext with the reference model, and
// checks the latency (done exactly 10 edges after the start edge). Around
// that it makes each mechanism of the countermeasure happen and counts it:
//   path switches   a byte's CTL changes between consecutive cycles
//   stale data      after an encryption, an idle flip-flop of a protected
//                   byte holds a value other than the ciphertext
//   idle hold       the clock keeps running while idle: paths keep switching
//                   and the ciphertext must not change
//   busy start      a start raised during an encryption is ignored
//   back-to-back    a new start in the cycle done is high
//   reseed          the CTL generator is reseeded between encryptions
// A mechanism that never happened counts as a failure.
module tb_spsc_aes_top;
  import aes_ref_pkg::*;
  localparam logic [127:0] MASK = 128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00;

  logic clk = 0, rst_n = 0, start = 0, reseed = 0;
  logic [31:0] seed = 32'h0bad_cafe;
  logic [127:0] key = '0, pt = '0, ct;
  logic busy, done;
  logic [127:0] ffa, ffb;
  int checks = 0, failures = 0, cyc = 0;
  int n_enc = 0, n_switch = 0, n_stale = 0, n_idle_hold = 0, n_busy_start = 0;
  int n_b2b = 0, n_reseed = 0;
  logic [15:0] ctl_prev;

  spsc_aes_top u_dut (.clk, .rst_n, .seed, .reseed, .start, .key, .plaintext(pt),
                      .busy, .done, .ciphertext(ct));

  for (genvar j = 0; j < 128; j++) begin : g_probe
    if (MASK[j]) begin : g_p
      assign ffa[j] = u_dut.u_state.g_bit[j].g_prim.u_prim.g_two.ff_a;
      assign ffb[j] = u_dut.u_state.g_bit[j].g_prim.u_prim.g_two.ff_b;
    end else begin : g_n
      assign ffa[j] = 1'b0;
      assign ffb[j] = 1'b0;
    end
  end

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (rst_n) n_switch += $countones(u_dut.ctl_load ^ ctl_prev);
    ctl_prev <= u_dut.ctl_load;
  end

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d %s", cyc, what);
    end
  endtask

  // One encryption; start is applied at a negedge and the result checked.
  // busy_start: raise start again in the middle of the run.
  // b2b: leave start high at done so that the next run begins at once.
  task automatic encrypt(logic [127:0] k, logic [127:0] p, bit busy_start, string what);
    logic [127:0] exp = aes_ref_pkg::encrypt(k, p);
    int lat = 0;
    key = k; pt = p; start = 1;
    @(negedge clk);
    start = 0;
    key = rand128(); pt = rand128();   // inputs are only sampled at start
    while (!done && lat < 40) begin
      lat++;
      if (busy_start && lat == 4) begin
        start = 1; n_busy_start++;
      end else start = 0;
      @(negedge clk);
    end
    start = 0;
    chk(lat == 10, $sformatf("%s: done 10 edges after start (got %0d)", what, lat));
    chk(ct == exp, $sformatf("%s: ciphertext %032h exp %032h", what, ct, exp));
    n_enc++;
    for (int b = 0; b < 16; b++) begin
      logic [7:0] m;
      m = MASK[127-8*b -: 8];
      if (m != 0 && ((u_dut.ctl_sel[b] ? ffa : ffb) & {120'b0, m} << (120 - 8*b)) !=
                    (ct & {120'b0, m} << (120 - 8*b))) n_stale++;
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] hold_ct;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !done && ct == '0, "idle and cleared after reset");
    encrypt(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'h3243f6a8885a308d313198a2e0370734, 0, "FIPS-197 B");
    chk(ct == 128'h3925841d02dc09fbdc118597196a0b32, "FIPS-197 B published ciphertext");
    encrypt(128'h000102030405060708090a0b0c0d0e0f, 128'h00112233445566778899aabbccddeeff, 1, "FIPS-197 C.1");
    chk(ct == 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "FIPS-197 C.1 published ciphertext");
    // idle with running clock: ciphertext must stay while CTL keeps switching
    hold_ct = ct;
    for (int i = 0; i < 50; i++) begin
      @(negedge clk);
      chk(ct == hold_ct && !busy, "ciphertext held while idle");
      n_idle_hold++;
    end
    for (int n = 0; n < 40; n++) begin
      if (n % 7 == 3) begin
        seed = $urandom; reseed = 1;
        @(negedge clk);
        reseed = 0; n_reseed++;
      end
      encrypt(rand128(), rand128(), n % 5 == 1, $sformatf("random %0d", n));
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    // back-to-back: start again in the cycle done is high
    begin
      logic [127:0] k, p;
      k = rand128(); p = rand128();
      key = k; pt = p; start = 1;
      @(negedge clk);
      start = 0;
      for (int n = 0; n < 5; n++) begin
        repeat (10) @(negedge clk);
        chk(done, "b2b: done 10 edges after start");
        chk(ct == aes_ref_pkg::encrypt(k, p), "b2b: ciphertext");
        n_enc++;
        if (n < 4) begin
          k = rand128(); p = rand128();
          key = k; pt = p; start = 1;
          #1 chk(u_dut.ld_init, "b2b: start accepted in the done cycle");
          @(negedge clk);
          start = 0;
          chk(busy, "b2b: running again");
          n_b2b++;
        end
      end
    end
    $display("encryptions=%0d switches=%0d stale=%0d idle_hold=%0d busy_start=%0d b2b=%0d reseed=%0d",
             n_enc, n_switch, n_stale, n_idle_hold, n_busy_start, n_b2b, n_reseed);
    chk(n_enc > 0, "encryptions happened");
    chk(n_switch > 0, "path switches happened");
    chk(n_stale > 0, "stale data in idle paths happened");
    chk(n_idle_hold > 0, "idle hold happened");
    chk(n_busy_start > 0, "start while busy happened");
    chk(n_b2b > 0, "back-to-back start happened");
    chk(n_reseed > 0, "reseed happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
