// aes_imc_top: AES-IMC, an AES-128 encryption core built from two 64-bit
// in-memory processing units.
//
// The 128-bit plaintext and key are not cut into two 64-bit halves of bytes but
// into two nibble planes: unit 1 holds the high nibble of all 16 bytes, unit 2
// the low nibble, each plane in a 4x4 crossbar of 4-bit memristor cells.
// input1/key1/finalout1 are the high-nibble planes and input2/key2/finalout2
// the low-nibble planes; nibble n of a plane (bits [63-4n -: 4]) belongs to
// byte n of the FIPS-197 block. Example: plaintext 00112233..ff is input1 =
// 0123456789abcdef, input2 = 0123456789abcdef; ciphertext 69c4e0d8..c55a comes
// out as finalout1 = 6ced6703dcb87bc5, finalout2 = 9408ab408d70045a.
//
// Pipelined engine: aes_imc_multibank with one bank (NBANKS = 1). One
// round per step: the state crossbars State1/State2 and the key crossbars
// Key1/Key2 are read in full; the key generator forms the next round
// key; Subbyte pairs the nibbles of the two planes for the S-boxes; Shiftrow
// offsets the column addresses; Mixcolumn (rounds 1..9 only, round 10
// bypasses it) combines M-2 and XOR; the two Addroundkey XORs add the new key;
// the result and the new key are written back into the crossbars, overwriting
// the previous state and key.
//
// Control: aes_imc_controller steps LOAD, K00 (initial Addroundkey), K01..K10,
// OUT, READY. Each working step is a start/done handshake with a one-cycle
// done flop, so `ready` rises 26 clock edges after `start` is sampled
// and finalout1/finalout2 hold the ciphertext while `ready` is high. A new
// `start` during READY begins the next block. `reset` is synchronous and
// active high. `current_state` is the controller state, `current_round` the
// round number (both of the pipelined engine).
//
// Row-sequential mode: with `row_mode` high when `start` is accepted, the
// block is instead encrypted by aes_imc_rowseq, which works one crossbar row
// at a time through the sense amplifiers, keeps M-2 and Tj in buffer rows,
// and takes 232 cycles. `ready` and finalout1/2 then come from that engine.
// The mode is sampled with each accepted start, and a start is ignored while
// the engine of the current mode is busy.
//
// From the paper: the two 64-bit units, State/key/Sub/Shift/Mix blocks and
// their loop (rounds 1-9 through Mix, round 10 without), the nibble pairing
// for the S-box, the 26-cycle latency, and the row-by-row in-array steps of
// the second engine. The per-step cycle split and putting both engines behind
// one mode input are this design's choices.
module aes_imc_top
  import aes_imc_pkg::*;
(
  input  logic        clk,
  input  logic        reset,
  input  logic        start,
  input  logic        row_mode,
  input  logic [63:0] input1,
  input  logic [63:0] input2,
  input  logic [63:0] key1,
  input  logic [63:0] key2,
  output logic [63:0] finalout1,
  output logic [63:0] finalout2,
  output logic        ready,
  output logic [3:0]  current_state,
  output logic [3:0]  current_round
);

  ctrl_state_e state;
  logic [3:0]  round;
  logic        pipe_ready, pipe_busy;
  logic        rs_ready, rs_busy;
  logic        mode_q, accept;
  plane_t      pipe_out1, pipe_out2, rs_out1, rs_out2;

  // Engine select: a start is accepted only when the engine of the current
  // mode is not busy; row_mode is sampled with it.
  assign accept    = start && !(mode_q ? rs_busy : pipe_busy);

  always_ff @(posedge clk) begin
    if (reset)       mode_q <= 1'b0;
    else if (accept) mode_q <= row_mode;
  end

  aes_imc_rowseq u_rowseq (
    .clk    (clk),
    .rst    (reset),
    .start  (accept && row_mode),
    .input1 (input1),
    .input2 (input2),
    .key1   (key1),
    .key2   (key2),
    .out1   (rs_out1),
    .out2   (rs_out2),
    .busy   (rs_busy),
    .ready  (rs_ready)
  );

  assign finalout1 = mode_q ? rs_out1 : pipe_out1;
  assign finalout2 = mode_q ? rs_out2 : pipe_out2;
  assign ready     = mode_q ? rs_ready : pipe_ready;

  // Pipelined engine: one bank of the multi-bank array (State1/State2, Key1/
  // Key2, key generator, Sub, Shift, Mix, Addroundkey and the controller).
  plane_t [0:0] pipe_in1, pipe_in2, pipe_q1, pipe_q2;

  assign pipe_in1[0] = input1;
  assign pipe_in2[0] = input2;
  assign pipe_out1   = pipe_q1[0];
  assign pipe_out2   = pipe_q2[0];

  aes_imc_multibank #(.NBANKS(1)) u_pipe (
    .clk    (clk),
    .rst    (reset),
    .start  (accept && !row_mode),
    .key1   (key1),
    .key2   (key2),
    .input1 (pipe_in1),
    .input2 (pipe_in2),
    .out1   (pipe_q1),
    .out2   (pipe_q2),
    .busy   (pipe_busy),
    .ready  (pipe_ready),
    .state  (state),
    .round  (round)
  );

  assign current_state = 4'(state);
  assign current_round = round;

  // The ciphertext must not change while ready is high.
  a_hold_out: assert property (@(posedge clk) disable iff (reset)
                               ready && $past(ready) |-> $stable(finalout1) && $stable(finalout2))
    else $error("finalout changed while ready");

endmodule
