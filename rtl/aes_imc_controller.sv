// aes_imc_controller: sequencer of the AES-IMC core.
//
// A chain of Moore states, one per step of the encryption. Each working state
// raises `op_start` for the shared round hardware and waits until that
// hardware answers `op_done`; the answer moves the chain to the next state
// (a state whose done is still low holds). The chain is
//
//   IDLE --start--> LOAD -> K00 -> K01 -> ... -> K10 -> OUT -> READY
//
// LOAD writes plaintext and key into the crossbars (one cycle, no handshake).
// K00 is the initial Addroundkey, Kr (r = 1..10) round r (`round` gives r;
// round 10 skips Mixcolumn), OUT latches the ciphertext. READY holds `ready`
// high until the next `start`, which begins a new block directly.
//
// Timing: with the one-cycle done answer of the core, K00..K10 and OUT take
// two cycles each, so `ready` rises on the 26th rising edge counted from the
// edge that samples `start` (1 + 1 + 11*2 + 2 = 26, counting IDLE->LOAD as the
// first). `start` is ignored while a block is in flight.
//
// From the paper: the chain of Moore states with start, done and ready, the
// state names K00..K10, and the 26-cycle encryption. How the 26 cycles are
// spent (LOAD and OUT steps, two-cycle handshake per step) is this design's
// choice.
module aes_imc_controller
  import aes_imc_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        start,
  input  logic        op_done,
  output ctrl_state_e state,
  output logic [3:0]  round,
  output logic        load,
  output logic        op_start,
  output logic        ready
);

  ctrl_state_e state_q, state_d;
  logic [3:0]  round_q, round_d;

  always_comb begin
    state_d = state_q;
    round_d = round_q;
    unique case (state_q)
      ST_IDLE:  if (start) state_d = ST_LOAD;
      ST_LOAD:  begin state_d = ST_K00; round_d = 4'd0; end
      ST_K00:   if (op_done) begin state_d = ST_ROUND; round_d = 4'd1; end
      ST_ROUND: if (op_done) begin
                  if (round_q == 4'(NROUND)) state_d = ST_OUT;
                  else                       round_d = round_q + 4'd1;
                end
      ST_OUT:   if (op_done) state_d = ST_READY;
      ST_READY: if (start) state_d = ST_LOAD;
      default:  state_d = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= ST_IDLE;
      round_q <= '0;
    end else begin
      state_q <= state_d;
      round_q <= round_d;
    end
  end

  // Moore outputs.
  assign state    = state_q;
  assign round    = round_q;
  assign load     = (state_q == ST_LOAD);
  assign op_start = (state_q == ST_K00) || (state_q == ST_ROUND) || (state_q == ST_OUT);
  assign ready    = (state_q == ST_READY);

  // Done may only answer a start.
  a_done_after_start: assert property (@(posedge clk) disable iff (rst) op_done |-> op_start)
    else $error("op_done without op_start");
  a_round_range: assert property (@(posedge clk) disable iff (rst)
                                  (state_q == ST_ROUND) |-> (round_q >= 1 && round_q <= 4'(NROUND)))
    else $error("round out of range");

endmodule
