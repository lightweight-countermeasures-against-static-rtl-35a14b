// ctl_rng: random binary number generator for the primitives' CTL inputs.
//
// The countermeasure only requires that CTL be a random bit that changes as
// the clock runs; no generator is specified. This is the simplest one that
// does the job: an LFSR_W-bit Galois LFSR (default x^32+x^22+x^2+x+1, maximal
// length) that steps on every clock edge, so every clocked cycle, including
// the cycles an attacker uses to advance the cipher, draws fresh CTL bits.
// It is pseudo-random; a true random source could replace it behind the same
// ports.
//
// Outputs: ctl_load[i] = lfsr[(2*i) mod LFSR_W], the bits that choose the
// capturing path at the next edge, and ctl_sel = ctl_load registered once,
// the bits that choose the output path (see spsc_primitive). Reset
// (asynchronous, active-low) puts the LFSR in the constant state RESET_STATE
// so that no flip-flop needs an asynchronous load of a data value; the seed
// is loaded synchronously in any cycle in which reseed is high, which a system
// would do once after reset from a secret or random source. A zero seed is
// replaced by 1 so the LFSR cannot lock up.
module ctl_rng #(
  parameter int unsigned        N_CTL  = 16,
  parameter int unsigned        LFSR_W = 32,
  parameter logic [LFSR_W-1:0]  TAPS   = LFSR_W'(32'h8020_0003),
  parameter logic [LFSR_W-1:0]  RESET_STATE = LFSR_W'(32'h1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LFSR_W-1:0] seed,      // sampled when reseed is high
  input  logic              reseed,
  output logic [N_CTL-1:0]  ctl_load,
  output logic [N_CTL-1:0]  ctl_sel
);

  logic [LFSR_W-1:0] lfsr_q, lfsr_next, seed_nz;

  assign seed_nz   = (seed == '0) ? LFSR_W'(1) : seed;
  assign lfsr_next = (lfsr_q >> 1) ^ (lfsr_q[0] ? TAPS : '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_q  <= RESET_STATE;
      ctl_sel <= '0;
    end else begin
      lfsr_q  <= reseed ? seed_nz : lfsr_next;
      ctl_sel <= ctl_load;
    end
  end

  always_comb begin
    for (int i = 0; i < N_CTL; i++) ctl_load[i] = lfsr_q[(2*i) % LFSR_W];
  end

  a_nonzero: assert property (@(posedge clk) disable iff (!rst_n) lfsr_q != '0);

endmodule
