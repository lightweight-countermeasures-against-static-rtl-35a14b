// spsc_aes_top: AES-128 encryption core with the lightweight static-power
// countermeasure in its state register.
//
// Datapath: an iterative core, one round per clock. The state register
// (spsc_state_reg) holds plaintext ^ key after the start edge, then the
// output of each round, and finally the ciphertext, which it keeps while the
// core is idle. The round-key register is an ordinary register advanced once
// per round by aes_key_expand. aes_ctrl sequences the rounds.
//
// Countermeasure: the state-register bits set in PRIM_MASK are primitives
// (two-path where PATH2_MASK is also set, one-path otherwise) whose CTL comes
// from ctl_rng, one random bit per byte, renewed every clock cycle.
// Functionally the core is a plain AES-128 encryptor; the primitives only
// change which physical flip-flop holds each protected bit, so the leakage
// power seen while the clock is halted no longer follows the data alone.
//
// Interface: pulse or hold start while idle with key and plaintext valid; done
// is high for one cycle, NR = 10 edges after the edge that sampled start, and
// ciphertext stays valid until the next start. busy is high during the rounds.
// seed/reseed seed the CTL generator; reseed once after reset, since reset
// alone always starts the same CTL sequence. Reset is asynchronous,
// active-low.
//
// Origin: the primitive, its random control and the byte-wise mix (by default
// eight bytes with eight two-path primitives, eight bytes with none) follow
// the published countermeasure. The AES core around it (iterative, table
// S-boxes, on-the-fly key schedule, encryption only), the handshake, the
// reset values, the choice of protected bytes and the LFSR as random source
// are this design's own.
module spsc_aes_top
  import aes_pkg::*;
#(
  parameter logic [127:0] PRIM_MASK = 128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00,
  parameter logic [127:0] PATH2_MASK = 128'h00FFFF00_FF0000FF_FF0000FF_00FFFF00,
  parameter int unsigned  LFSR_W    = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LFSR_W-1:0] seed,
  input  logic              reseed,
  input  logic              start,
  input  block_t            key,
  input  block_t            plaintext,
  output logic              busy,
  output logic              done,
  output block_t            ciphertext
);

  logic        ld_init, ld_round, final_round;
  byte_t       rcon;
  logic [15:0] ctl_load, ctl_sel;
  block_t      state_q, state_d, round_out;
  block_t      rkey_q, rkey_next;

  aes_ctrl u_ctrl (
    .clk, .rst_n, .start, .busy, .done,
    .ld_init, .ld_round, .final_round, .rcon
  );

  ctl_rng #(.N_CTL(16), .LFSR_W(LFSR_W)) u_rng (
    .clk, .rst_n, .seed, .reseed, .ctl_load, .ctl_sel
  );

  aes_key_expand u_kexp (.key_in(rkey_q), .rcon, .key_out(rkey_next));

  aes_round u_round (
    .state_in(state_q), .round_key(rkey_next), .final_round, .state_out(round_out)
  );

  always_comb begin
    if (ld_init)       state_d = plaintext ^ key;
    else if (ld_round) state_d = round_out;
    else               state_d = state_q;
  end

  spsc_state_reg #(.PRIM_MASK(PRIM_MASK), .PATH2_MASK(PATH2_MASK)) u_state (
    .clk, .rst_n, .ctl_load, .ctl_sel, .d(state_d), .q(state_q)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        rkey_q <= '0;
    else if (ld_init)  rkey_q <= key;
    else if (ld_round) rkey_q <= rkey_next;
  end

  assign ciphertext = state_q;

endmodule
