// tb_spsc_aes_configs: runs the protected AES core in the primitive mixes of
// the evaluated design grid side by side and checks that every one of them
// still encrypts correctly under random CTL.
//
// Grid: the sixteen state bytes are split into two halves. Half A (bytes 0, 3,
// 5, 6, 9, 10, 12, 15) receives nA one-path primitives per byte, half B (the
// default protected bytes 1, 2, 4, 7, 8, 11, 13, 14) receives nB primitives per
// byte, two-path for the LVT + drive-strength designs and one-path for the
// LVT-only designs. The bit positions inside each byte are drawn by a fixed
// pseudo-random permutation (LCG), as the evaluated designs placed them at
// random. Instances:
//   0  baseline              nA=0 nB=0
//   1  LVT-only  (4, 2)      one-path in both halves
//   2  LVT-only  (8, 6)      one-path in both halves
//   3  LVT+drive (0, 8)      the default configuration
//   4  LVT+drive (8, 0)
//   5  LVT+drive (4, 4)
//   6  LVT+drive (2, 6)
//   7  LVT+drive (8, 8)      every state bit protected
// All instances get the same key, plaintext and start; each is seeded
// differently. Every ciphertext is compared with the reference model, the
// primitive counts are checked against the grid, and the test fails if some
// instance never had a protected byte switch paths.
module tb_spsc_aes_configs;
  import aes_ref_pkg::*;

  localparam int NCFG = 8;
  localparam logic [15:0] HALF_B = 16'b0110_1001_1001_0110;  // bit k = byte k

  function automatic int cfg_na(int i);
    case (i) 1: return 4; 2: return 8; 4: return 8; 5: return 4; 6: return 2; 7: return 8;
      default: return 0;
    endcase
  endfunction
  function automatic int cfg_nb(int i);
    case (i) 1: return 2; 2: return 6; 3: return 8; 5: return 4; 6: return 6; 7: return 8;
      default: return 0;
    endcase
  endfunction
  function automatic bit cfg_two(int i);
    return i >= 3;
  endfunction

  // which = 0: PRIM_MASK, which = 1: PATH2_MASK
  function automatic logic [127:0] mk_mask(int i, bit which);
    logic [127:0] m = '0;
    int unsigned lcg = 32'd12345 + 32'd977 * i;
    for (int k = 0; k < 16; k++) begin
      int perm [8];
      int n = HALF_B[k] ? cfg_nb(i) : cfg_na(i);
      bit two = HALF_B[k] && cfg_two(i);
      for (int b = 0; b < 8; b++) perm[b] = b;
      for (int b = 7; b > 0; b--) begin
        int r, t;
        lcg = lcg * 32'd1103515245 + 32'd12345;
        r = int'((lcg >> 16) % (b + 1));
        t = perm[b]; perm[b] = perm[r]; perm[r] = t;
      end
      for (int b = 0; b < n; b++)
        if (!which || two) m[127 - 8*k - perm[b]] = 1'b1;
    end
    return m;
  endfunction

  logic clk = 0, rst_n = 0, start = 0, reseed = 0;
  logic [127:0] key = '0, pt = '0;
  logic [NCFG-1:0] busy, done;
  logic [127:0] ct [NCFG];
  int sw [NCFG];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    localparam logic [127:0] PM = mk_mask(i, 0);
    localparam logic [127:0] P2 = mk_mask(i, 1);
    logic [15:0] prev;
    spsc_aes_top #(.PRIM_MASK(PM), .PATH2_MASK(P2)) u_dut (
      .clk, .rst_n, .seed(32'h9e37_79b9 * (i + 1)), .reseed, .start, .key,
      .plaintext(pt), .busy(busy[i]), .done(done[i]), .ciphertext(ct[i]));
    always @(posedge clk) begin
      if (rst_n) sw[i] += $countones((u_dut.ctl_load ^ prev) & PM_BYTES(PM));
      prev <= u_dut.ctl_load;
    end
  end

  function automatic logic [15:0] PM_BYTES(logic [127:0] m);
    for (int k = 0; k < 16; k++) PM_BYTES[k] = |m[127 - 8*k -: 8];
  endfunction

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NCFG; i++) begin
      int np, n2, ep, e2;
      np = $countones(mk_mask(i, 0));
      n2 = $countones(mk_mask(i, 1));
      ep = 8 * (cfg_na(i) + cfg_nb(i));
      e2 = cfg_two(i) ? 8 * cfg_nb(i) : 0;
      chk(np == ep && n2 == e2, $sformatf("config %0d: %0d primitives (%0d two-path), expected %0d (%0d)",
                                          i, np, n2, ep, e2));
      sw[i] = 0;
    end
    chk(mk_mask(3, 0) == 128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00, "config 3 is the default mask");
    repeat (2) @(negedge clk);
    rst_n = 1;
    reseed = 1;
    @(negedge clk);
    reseed = 0;
    for (int n = 0; n < 30; n++) begin
      logic [127:0] exp;
      key = rand128(); pt = rand128();
      exp = aes_ref_pkg::encrypt(key, pt);
      start = 1;
      @(negedge clk);
      start = 0;
      repeat (10) @(negedge clk);
      for (int i = 0; i < NCFG; i++) begin
        chk(done[i], $sformatf("config %0d done", i));
        chk(ct[i] == exp, $sformatf("config %0d ciphertext %032h exp %032h", i, ct[i], exp));
      end
      repeat ($urandom_range(0, 4)) @(negedge clk);
    end
    for (int i = 1; i < NCFG; i++)
      chk(sw[i] > 0, $sformatf("config %0d: protected bytes switched paths (%0d)", i, sw[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
