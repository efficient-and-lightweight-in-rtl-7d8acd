// aes_imc_addroundkey: Addroundkey on one 64-bit nibble plane.
//
// Each of the 16 column sense amplifiers of the crossbar pair takes one state
// nibble (read first and held on its capacitor) and the matching key nibble
// (read next and held in its latch) and produces their XOR. All sixteen work
// at once, so a whole plane is combined in one step. Two instances, one per
// plane, form the 128-bit Addroundkey.
//
// Interface: `state` and `key` are nibble planes, `result` = state XOR key,
// cross-point by cross-point. Timing: combinational; the caller writes
// `result` back into the state crossbar at the next clock edge.
//
// From the paper: the XOR of a state row and a key row in the sense
// amplifiers, parallel over the array. Doing all four rows in the same step
// (instead of one row at a time) is this design's choice, matching the
// one-round-per-step pipeline.
module aes_imc_addroundkey
  import aes_imc_pkg::*;
(
  input  plane_t state,
  input  plane_t key,
  output plane_t result
);

  // One sense amplifier per cross-point: held operand XOR latched operand.
  always_comb begin
    for (int n = 0; n < CELLS; n++) begin
      nibble_t held, latched;
      held    = state[63-4*n -: 4];
      latched = key[63-4*n -: 4];
      result[63-4*n -: 4] = held ^ latched;
    end
  end

endmodule
