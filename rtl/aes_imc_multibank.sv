// aes_imc_multibank: several AES-IMC state banks sharing one key generator.
//
// What it does: encrypts NBANKS 128-bit blocks at once under one 128-bit
// key. Each bank is a pair of 4x4 state crossbars (high and low nibble planes)
// with its own Subbyte, Shiftrow, Mixcolumn and Addroundkey periphery. There
// is a single pair of key crossbars, a single key generator and a single
// controller; the round key produced each round is sent to every bank.
//
// How it works: one full AES round per controller step. LOAD writes every bank's plaintext and the shared key; K00
// adds the cipher key; rounds 1..9 run Sub, Shift, Mix and add the new round
// key, round 10 skips Mix; the new key overwrites the key crossbars after each
// round. OUT copies every bank's state into its output register.
//
// Interface: key1/key2 are the key planes (plane 1 = high nibbles, plane 2 =
// low nibbles, nibble n = bits [63-4n -: 4] = byte n). input1[b]/input2[b]
// are the plaintext planes of bank b, out1[b]/out2[b] its ciphertext planes.
// `rst` is synchronous, active high.
//
// Timing: `start` is sampled in IDLE or READY; `ready` rises 26 clock edges
// later (aes_imc_controller with a one-cycle done flop), and out1/out2 hold all NBANKS ciphertexts while `ready` is high. `busy` is high
// between. Latency does not depend on NBANKS. `state` and `round` are the
// controller's step and round number.
//
// aes_imc_top uses this block with NBANKS = 1 as its pipelined engine.
//
// From the paper: a key generator shared among all memory banks that sends
// the round key to the different banks, with round keys overwriting the key
// in the key array. The number of banks (NBANKS, default 4) and running all
// banks in lockstep under one controller are this design's choices.
module aes_imc_multibank
  import aes_imc_pkg::*;
#(
  parameter int unsigned NBANKS = 4
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   start,
  input  plane_t                 key1,
  input  plane_t                 key2,
  input  plane_t [NBANKS-1:0]    input1,
  input  plane_t [NBANKS-1:0]    input2,
  output plane_t [NBANKS-1:0]    out1,
  output plane_t [NBANKS-1:0]    out2,
  output logic                   busy,
  output logic                   ready,
  output ctrl_state_e            state,
  output logic [3:0]             round
);

  initial begin
    if (NBANKS < 1) $error("aes_imc_multibank: NBANKS must be at least 1");
  end

  logic        load, op_start, op_done, do_op;
  logic        in_round, last_round, s_we, k_we;

  aes_imc_controller u_ctrl (
    .clk      (clk),
    .rst      (rst),
    .start    (start),
    .op_done  (op_done),
    .state    (state),
    .round    (round),
    .load     (load),
    .op_start (op_start),
    .ready    (ready)
  );

  always_ff @(posedge clk) begin
    if (rst) op_done <= 1'b0;
    else     op_done <= op_start && !op_done;
  end
  assign do_op = op_start && !op_done;

  assign busy       = !(state == ST_IDLE || state == ST_READY);
  assign in_round   = (state == ST_ROUND);
  assign last_round = in_round && (round == 4'(NROUND));
  assign s_we       = load || (do_op && (state == ST_K00 || in_round));
  assign k_we       = load || (do_op && in_round);

  // ---- shared key path -----------------------------------------------------
  plane_t k1_q, k2_q, nk1, nk2, k1_d, k2_d, rk1, rk2;

  assign k1_d = load ? key1 : nk1;
  assign k2_d = load ? key2 : nk2;

  mr_crossbar u_key1 (.clk(clk), .rst(rst), .wl_we({4{k_we}}), .wdata(k1_d),
                      .rdata(k1_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_key2 (.clk(clk), .rst(rst), .wl_we({4{k_we}}), .wdata(k2_d),
                      .rdata(k2_q), .bl_sel(2'd0), .bl_data());

  aes_imc_keygen u_keygen (.key1(k1_q), .key2(k2_q), .rcon_in(rcon(int'(round))),
                           .next1(nk1), .next2(nk2));

  // Key broadcast to the banks: the cipher key in K00, the new round key in
  // rounds 1..10.
  assign rk1 = in_round ? nk1 : k1_q;
  assign rk2 = in_round ? nk2 : k2_q;

  // ---- banks ---------------------------------------------------------------
  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    plane_t s1_q, s2_q, s1_d, s2_d;
    plane_t sub1, sub2, sh1, sh2, mix1, mix2, ark_in1, ark_in2, ark1, ark2;

    mr_crossbar u_state1 (.clk(clk), .rst(rst), .wl_we({4{s_we}}), .wdata(s1_d),
                          .rdata(s1_q), .bl_sel(2'd0), .bl_data());
    mr_crossbar u_state2 (.clk(clk), .rst(rst), .wl_we({4{s_we}}), .wdata(s2_d),
                          .rdata(s2_q), .bl_sel(2'd0), .bl_data());

    aes_imc_subbyte u_sub (.in_sub1(s1_q), .in_sub2(s2_q),
                           .out_sub1(sub1), .out_sub2(sub2));
    aes_imc_shiftrow u_shift1 (.in_shift(sub1), .out_shift(sh1));
    aes_imc_shiftrow u_shift2 (.in_shift(sub2), .out_shift(sh2));
    aes_imc_mixcolumn u_mix (.in_mix1(sh1), .in_mix2(sh2),
                             .out_mix1(mix1), .out_mix2(mix2));

    assign ark_in1 = !in_round ? s1_q : (last_round ? sh1 : mix1);
    assign ark_in2 = !in_round ? s2_q : (last_round ? sh2 : mix2);

    aes_imc_addroundkey u_xor1 (.state(ark_in1), .key(rk1), .result(ark1));
    aes_imc_addroundkey u_xor2 (.state(ark_in2), .key(rk2), .result(ark2));

    assign s1_d = load ? input1[b] : ark1;
    assign s2_d = load ? input2[b] : ark2;

    always_ff @(posedge clk) begin
      if (rst) begin
        out1[b] <= '0;
        out2[b] <= '0;
      end else if (do_op && state == ST_OUT) begin
        out1[b] <= s1_q;
        out2[b] <= s2_q;
      end
    end
  end

  // The ciphertexts must not change while ready is high.
  a_hold_out: assert property (@(posedge clk) disable iff (rst)
                               ready && $past(ready) |-> $stable(out1) && $stable(out2))
    else $error("multibank output changed while ready");

endmodule
