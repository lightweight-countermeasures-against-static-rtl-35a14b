// tb_aes_ctrl: checks the controller's sequencing. For several encryptions it
// verifies that start is taken only when idle, that ld_round/busy stay high
// for exactly 10 cycles, that final_round marks the tenth, that rcon runs
// through 01 02 04 08 10 20 40 80 1b 36, and that done pulses for one cycle
// exactly 10 edges after the edge that sampled start. A start raised while
// busy must be ignored.
module tb_aes_ctrl;
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done, ld_init, ld_round, final_round;
  logic [7:0] rcon;
  int checks = 0, failures = 0, cyc = 0;
  int ignored_starts = 0;

  aes_ctrl u_dut (.clk, .rst_n, .start, .busy, .done, .ld_init, .ld_round, .final_round, .rcon);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL @%0d %s", cyc, what);
    end
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] exp_rc [10] = '{8'h01, 8'h02, 8'h04, 8'h08, 8'h10, 8'h20, 8'h40, 8'h80, 8'h1b, 8'h36};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !done && !ld_init && !ld_round, "idle after reset");
    for (int n = 0; n < 6; n++) begin
      start = 1;
      #1 chk(ld_init, "ld_init with start while idle");
      @(negedge clk);
      // hold start high for the n-th run to show it is ignored while busy
      start = (n % 2 == 1);
      for (int r = 1; r <= 10; r++) begin
        chk(busy && ld_round && !ld_init, $sformatf("round %0d busy/ld_round", r));
        chk(final_round == (r == 10), $sformatf("round %0d final_round", r));
        chk(rcon == exp_rc[r-1], $sformatf("round %0d rcon %02h", r, rcon));
        chk(!done, $sformatf("round %0d no done", r));
        if (start) ignored_starts++;
        @(negedge clk);
      end
      start = 0;
      chk(done && !busy, "done one cycle after round 10");
      @(negedge clk);
      chk(!done, "done is a single pulse");
      repeat (n) @(negedge clk);
      chk(!busy && !done, "stays idle without start");
    end
    chk(ignored_starts > 0, "start while busy was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
