// spsc_state_reg: the 128-bit AES state register with the countermeasure
// applied byte-wise.
//
// Every bit j with PRIM_MASK[j] = 1 is an spsc_primitive; every other bit is
// an ordinary flip-flop (regular- or high-Vt in the cell library). A
// primitive bit is of the full two-path form when PATH2_MASK[j] = 1 and of
// the one-path form otherwise, so mixed designs (one-path primitives in one
// half of the bytes, two-path ones in the other) can be described. Byte k
// (FIPS-197 order, bits [127-8k -: 8]) uses CTL bit k, so all primitives of a
// byte switch paths together while different bytes switch independently.
//
// The default mask follows the most resilient configuration reported for the
// scheme: eight of the sixteen bytes carry eight two-path primitives each and
// the other eight carry none, which maximises the difference in leakage
// behaviour between bytes. Which eight bytes is a random choice in the
// original work; this design fixes bytes 1, 2, 4, 7, 8, 11, 13 and 14. Any
// other per-bit mix (for instance 2, 4 or 6 primitives per byte) is a change
// of PRIM_MASK.
//
// Interface and timing: q is d delayed by one clock, whatever CTL does;
// ctl_sel must be ctl_load registered once (see spsc_primitive). Reset is
// asynchronous, active-low, to all zeros.
module spsc_state_reg
  import aes_pkg::*;
#(
  parameter logic [127:0] PRIM_MASK = 128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00,
  parameter logic [127:0] PATH2_MASK = 128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] ctl_load,
  input  logic [15:0] ctl_sel,
  input  block_t      d,
  output block_t      q
);

  for (genvar j = 0; j < 128; j++) begin : g_bit
    localparam int unsigned BYTE = (127 - j) / 8;
    if (PRIM_MASK[j]) begin : g_prim
      spsc_primitive #(.PATHS(PATH2_MASK[j] ? 2 : 1)) u_prim (
        .clk, .rst_n,
        .ctl_load (ctl_load[BYTE]),
        .ctl_sel  (ctl_sel[BYTE]),
        .d        (d[j]),
        .q        (q[j])
      );
    end else begin : g_ff
      logic ff;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) ff <= 1'b0;
        else        ff <= d[j];
      end
      assign q[j] = ff;
    end
  end

  // Functional transparency of the countermeasure: the register behaves as a
  // plain D register.
  a_transparent: assert property (@(posedge clk) disable iff (!rst_n)
                                  $past(rst_n) |-> q == $past(d));

endmodule
