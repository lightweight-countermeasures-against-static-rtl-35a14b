// aes_ctrl: sequencing of the iterative AES-128 encryption core.
//
// Two states, IDLE and RUN. In IDLE a high start makes ld_init select
// plaintext ^ key for the state register and the key itself for the round-key
// register at the next edge; the controller then enters RUN with round = 1
// and rcon = 8'h01. In RUN, ld_round is high and one round is done per clock;
// final_round marks round NR, where MixColumns is skipped. After the edge that
// stores round NR the controller is back in IDLE and done is high for one
// cycle while the ciphertext sits in the state register. So the ciphertext is
// ready NR edges after the edge that sampled start (11 cycles counting the
// start cycle). start is ignored while busy. While idle nothing is loaded and
// the state register keeps its value, with or without a running clock. The
// handshake and latency are this design's own; the source describes only a
// conventional iterative AES core.
module aes_ctrl
  import aes_pkg::*;
#(
  parameter int unsigned NRND = NR
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  busy,
  output logic  done,
  output logic  ld_init,
  output logic  ld_round,
  output logic  final_round,
  output byte_t rcon
);

  typedef enum logic {S_IDLE, S_RUN} state_e;

  state_e state_q;
  logic [$clog2(NRND+1)-1:0] round_q;
  byte_t rcon_q;

  assign busy        = (state_q == S_RUN);
  assign ld_init     = (state_q == S_IDLE) && start;
  assign ld_round    = (state_q == S_RUN);
  assign final_round = (state_q == S_RUN) && (round_q == NRND[$bits(round_q)-1:0]);
  assign rcon        = rcon_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      round_q <= '0;
      rcon_q  <= 8'h01;
      done    <= 1'b0;
    end else begin
      done <= final_round;
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_RUN;
          round_q <= 1;
          rcon_q  <= 8'h01;
        end
        S_RUN: begin
          rcon_q  <= xtime(rcon_q);
          round_q <= round_q + 1'b1;
          if (final_round) state_q <= S_IDLE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // A round is only ever loaded while running, and never together with a new start.
  a_excl: assert property (@(posedge clk) disable iff (!rst_n) !(ld_init && ld_round));
  // done follows the final round by exactly one cycle.
  a_done: assert property (@(posedge clk) disable iff (!rst_n) final_round |=> done);

endmodule
