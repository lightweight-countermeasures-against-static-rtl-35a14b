// tb_spsc_primitive: drives the two-path and one-path primitive with random
// data and random CTL and checks, every cycle, that the output equals the
// input of the previous cycle (functional transparency), that the flip-flop
// of the active path captured the input while the other one kept its old
// value, and that both paths and stale data in the idle flip-flop actually
// occurred.
module tb_spsc_primitive;
  logic clk = 0, rst_n = 0;
  logic ctl_load = 0, ctl_sel = 0, d = 0;
  logic q2, q1;
  logic d_prev, a_prev, b_prev;
  int checks = 0, failures = 0;
  int n_upper = 0, n_lower = 0, n_stale = 0;

  spsc_primitive #(.PATHS(2)) u_dut  (.clk, .rst_n, .ctl_load, .ctl_sel, .d, .q(q2));
  spsc_primitive #(.PATHS(1)) u_one  (.clk, .rst_n, .ctl_load, .ctl_sel, .d, .q(q1));

  always #5 clk = ~clk;

  // CTL generator stand-in: ctl_sel is ctl_load registered once.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) ctl_sel <= 1'b0; else ctl_sel <= ctl_load;

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
    logic ctl_prev;
    repeat (2) @(negedge clk);
    chk(q2 == 0 && q1 == 0, "reset clears the primitive");
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      d = 1'($urandom);
      ctl_load = 1'($urandom);
      d_prev = d; ctl_prev = ctl_load;
      a_prev = u_dut.g_two.ff_a; b_prev = u_dut.g_two.ff_b;
      @(negedge clk);
      chk(q2 == d_prev, $sformatf("two-path q follows d (cycle %0d)", i));
      chk(q1 == d_prev, $sformatf("one-path q follows d (cycle %0d)", i));
      if (ctl_prev == 1'b0) begin
        n_upper++;
        chk(u_dut.g_two.ff_a == d_prev && u_dut.g_two.ff_b == b_prev, "CTL=0: upper captures, lower holds");
      end else begin
        n_lower++;
        chk(u_dut.g_two.ff_b == d_prev && u_dut.g_two.ff_a == a_prev, "CTL=1: lower captures, upper holds");
      end
      if (u_dut.g_two.ff_a != u_dut.g_two.ff_b) n_stale++;
    end
    $display("upper=%0d lower=%0d stale=%0d", n_upper, n_lower, n_stale);
    chk(n_upper > 0 && n_lower > 0 && n_stale > 0, "both paths and stale data occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
