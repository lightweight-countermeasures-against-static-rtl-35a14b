// spsc_primitive: the static-power countermeasure primitive that replaces one
// state-register flip-flop.
//
// Structure (two-path form, PATHS = 2): an upper path with flip-flop ff_a
// (built from a low-Vt cell of drive strength X_a) and a lower path with ff_b
// (low-Vt, strength X_b). Each flip-flop sits behind a 2:1 input multiplexer
// that chooses either the primitive's input d or the flip-flop's own output,
// and an output multiplexer chooses which flip-flop drives q.
//   CTL = 0: ff_a captures d, ff_b recirculates (holds); q is taken from ff_a.
//   CTL = 1: ff_b captures d, ff_a holds;                 q is taken from ff_b.
// The two paths are functionally identical, so q is always d delayed by one
// clock, exactly like the flip-flop it replaces. What changes with the random
// CTL is which flip-flop holds the current value and which one still holds an
// older value; the idle flip-flop leaks according to stale data, which blurs
// the data-dependent static (leakage) power of the register.
//
// Timing of CTL. One random bit decides both the capturing path and the
// output path. It must reach the output multiplexer one cycle later than the
// input multiplexers, or q would show the path that did not capture at the
// last edge. The primitive therefore takes the bit twice: ctl_load for the
// input multiplexers (path that captures at the next edge) and ctl_sel for the
// output multiplexer (the same bit, registered once by the CTL generator).
// That split is this design's own; the published schematic draws a single CTL
// net.
//
// One-path form (PATHS = 1): only the lower path is kept. Without an output
// multiplexer the flip-flop must capture d every cycle, so the input
// multiplexer's select is tied to "capture"; ctl_load and ctl_sel are unused.
//
// The low-Vt flavour and the drive strengths (X2, X4 or X8) are cell choices
// made during synthesis; RTL cannot carry them. Reset (asynchronous,
// active-low, both flip-flops to 0) is this design's choice.
module spsc_primitive #(
  parameter int unsigned PATHS = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ctl_load,
  input  logic ctl_sel,
  input  logic d,
  output logic q
);

  if (PATHS != 1 && PATHS != 2) begin : g_bad_paths
    $error("spsc_primitive: PATHS must be 1 or 2");
  end

  if (PATHS == 2) begin : g_two
    logic ff_a, ff_b;      // upper (X_a) and lower (X_b) flip-flops
    logic mux_a, mux_b;    // input multiplexers

    assign mux_a = ctl_load ? ff_a : d;   // upper path active on CTL = 0
    assign mux_b = ctl_load ? d : ff_b;   // lower path active on CTL = 1

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        ff_a <= 1'b0;
        ff_b <= 1'b0;
      end else begin
        ff_a <= mux_a;
        ff_b <= mux_b;
      end
    end

    assign q = ctl_sel ? ff_b : ff_a;     // output multiplexer
  end else begin : g_one
    logic ff_b;
    logic mux_b;
    logic unused;

    assign mux_b  = d;                    // input multiplexer fixed to capture
    assign unused = ctl_load ^ ctl_sel;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ff_b <= 1'b0;
      else        ff_b <= mux_b;
    end

    assign q = ff_b;
  end

endmodule
