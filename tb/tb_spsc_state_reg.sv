// tb_spsc_state_reg: checks the protected state register with its default
// byte mask. Random data and random per-byte CTL go in; every cycle q must
// equal the previous d. The structure is checked too: exactly the bits of
// the mask are primitives, and in each primitive byte the idle flip-flop keeps
// the older value (stale data) while plain bytes have no second copy. A
// second instance mixes one-path and two-path primitives.
module tb_spsc_state_reg;
  import aes_ref_pkg::rand128;
  localparam logic [127:0] MASK = 128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00;
  logic clk = 0, rst_n = 0;
  logic [15:0] ctl_load = '0, ctl_sel;
  logic [127:0] d = '0, q, d_prev;
  logic [127:0] ffa, ffb, ffa_prev, ffb_prev;
  logic [15:0] ctl_prev;
  int checks = 0, failures = 0, n_stale = 0;

  spsc_state_reg u_dut (.clk, .rst_n, .ctl_load, .ctl_sel, .d, .q);

  // A mixed design: 4 one-path primitives per byte in bytes 0-7 and 8 two-path
  // primitives per byte in bytes 8-15.
  localparam logic [127:0] MIX_PRIM  = 128'h0F0F0F0F_0F0F0F0F_FFFFFFFF_FFFFFFFF;
  localparam logic [127:0] MIX_PATH2 = 128'h00000000_00000000_FFFFFFFF_FFFFFFFF;
  logic [127:0] q_mix;
  spsc_state_reg #(.PRIM_MASK(MIX_PRIM), .PATH2_MASK(MIX_PATH2)) u_mix (
    .clk, .rst_n, .ctl_load, .ctl_sel, .d, .q(q_mix));

  always #5 clk = ~clk;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ctl_sel <= '0; else ctl_sel <= ctl_load;

  // Collect the two flip-flops of every primitive bit (0 for plain bits).
  for (genvar j = 0; j < 128; j++) begin : g_probe
    if (MASK[j]) begin : g_p
      assign ffa[j] = u_dut.g_bit[j].g_prim.u_prim.g_two.ff_a;
      assign ffb[j] = u_dut.g_bit[j].g_prim.u_prim.g_two.ff_b;
    end else begin : g_n
      assign ffa[j] = 1'b0;
      assign ffb[j] = 1'b0;
    end
  end

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

  // The mixed instance really has both primitive forms.
  initial begin
    #1;
    chk(u_mix.g_bit[120].g_prim.u_prim.PATHS == 1, "mixed: byte 0 bit is one-path");
    chk(u_mix.g_bit[0].g_prim.u_prim.PATHS == 2, "mixed: byte 15 bit is two-path");
  end

  initial begin
    int nprim;
    nprim = 0;
    for (int j = 0; j < 128; j++) nprim += MASK[j];
    chk(nprim == 64, "default mask holds 8 bytes x 8 primitives");
    repeat (2) @(negedge clk);
    chk(q == '0, "reset clears the register");
    rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      d = rand128();
      ctl_load = 16'($urandom);
      d_prev = d; ctl_prev = ctl_load; ffa_prev = ffa; ffb_prev = ffb;
      @(negedge clk);
      chk(q == d_prev, $sformatf("q follows d (cycle %0d)", i));
      chk(q_mix == d_prev, $sformatf("mixed register q follows d (cycle %0d)", i));
      for (int k = 0; k < 16; k++) begin
        logic [7:0] m, cap, hold, hold_prev;
        m         = MASK[127-8*k -: 8];
        cap       = ctl_prev[k] ? ffb[127-8*k -: 8] : ffa[127-8*k -: 8];
        hold      = ctl_prev[k] ? ffa[127-8*k -: 8] : ffb[127-8*k -: 8];
        hold_prev = ctl_prev[k] ? ffa_prev[127-8*k -: 8] : ffb_prev[127-8*k -: 8];
        if (m != 0) begin
          chk(cap == (d_prev[127-8*k -: 8] & m), $sformatf("byte %0d active path captured", k));
          chk(hold == hold_prev, $sformatf("byte %0d idle path held", k));
          if (hold != cap) n_stale++;
        end
      end
    end
    chk(n_stale > 0, "stale data present in idle paths");
    $display("stale byte-cycles: %0d", n_stale);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
