// tb_ctl_rng: checks the CTL generator. A small 8-bit instance (taps 8'hb8,
// x^8+x^6+x^5+x^4+1) must run through all 255 non-zero states before it
// repeats; the default 32-bit instance is compared for 3000 cycles with a
// model of the x^32+x^22+x^2+x+1 Galois LFSR written bit by bit. Also
// checked: the reset state, ctl_sel is ctl_load one cycle late, a zero seed
// is replaced by 1, reseed reloads the seed, and every CTL bit is roughly
// balanced.
module tb_ctl_rng;
  logic clk = 0, rst_n = 0, reseed = 0;
  logic [7:0]  seed8;
  logic [31:0] seed32;
  logic [3:0]  cl8, cs8;
  logic [15:0] cl32, cs32;
  logic [31:0] model;
  int checks = 0, failures = 0;
  int ones [16];

  ctl_rng #(.N_CTL(4), .LFSR_W(8), .TAPS(8'hb8)) u_small (
    .clk, .rst_n, .seed(seed8), .reseed, .ctl_load(cl8), .ctl_sel(cs8));
  ctl_rng u_dut (.clk, .rst_n, .seed(seed32), .reseed, .ctl_load(cl32), .ctl_sel(cs32));

  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // Reference step of a right-shifting Galois LFSR written per bit.
  function automatic logic [31:0] model_step(logic [31:0] s);
    logic [31:0] n;
    for (int i = 0; i < 32; i++) n[i] = (i == 31) ? s[0] : s[i+1];
    if (s[0]) begin
      n[31] = 1'b1; n[21] = s[22] ^ 1'b1; n[1] = s[2] ^ 1'b1; n[0] = s[1] ^ 1'b1;
    end
    return n;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] first;
    logic [15:0] prev_cl;
    bit seen [256];
    int period;
    seed8 = 8'h00; seed32 = 32'hdeadbeef;
    repeat (2) @(negedge clk);
    chk(u_small.lfsr_q == 8'h01 && u_dut.lfsr_q == 32'h1, "reset state");
    rst_n = 1;
    // zero seed -> state 1
    seed8 = 8'h00; reseed = 1;
    @(negedge clk);
    reseed = 0;
    chk(u_small.lfsr_q == 8'h01, "zero seed replaced by 1");
    // period of the 8-bit instance
    first = u_small.lfsr_q;
    period = 0;
    do begin
      chk(!seen[u_small.lfsr_q] && u_small.lfsr_q != 0, "8-bit state new and non-zero");
      seen[u_small.lfsr_q] = 1;
      @(negedge clk);
      period++;
    end while (u_small.lfsr_q != first && period < 300);
    chk(period == 255, $sformatf("8-bit period %0d == 255", period));
    // reseed both
    seed8 = 8'h5a; seed32 = 32'h1234_5678; reseed = 1;
    @(negedge clk);
    reseed = 0;
    chk(u_small.lfsr_q == 8'h5a && u_dut.lfsr_q == 32'h1234_5678, "reseed loads the seed");
    model = 32'h1234_5678;
    prev_cl = cl32;
    for (int i = 0; i < 3000; i++) begin
      for (int k = 0; k < 16; k++) begin
        chk(cl32[k] == model[2*k], "ctl_load bit matches model");
        ones[k] += cl32[k];
      end
      prev_cl = cl32;
      @(negedge clk);
      model = model_step(model);
      chk(cs32 == prev_cl, "ctl_sel is ctl_load delayed one cycle");
    end
    for (int k = 0; k < 16; k++)
      chk(ones[k] > 1300 && ones[k] < 1700, $sformatf("CTL bit %0d balance %0d/3000", k, ones[k]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
