// aes_imc_subbyte: Subbyte on the two nibble planes of the AES state.
//
// A state byte is split over the two processing units: its high nibble sits in
// cross-point n of plane 1 and its low nibble in cross-point n of plane 2. For
// each cross-point the two 4-bit cells are decoded together into one 8-bit
// S-box address, and the 8-bit result is written back split the same way:
// high nibble to plane 1, low nibble to plane 2. NSBOX S-box tables work in
// parallel; with NSBOX = 16 every cross-point has its own table and a whole
// state is substituted in one step.
//
// Interface: `in_sub1`/`in_sub2` in, `out_sub1`/`out_sub2` out (planes 1 and
// 2). Timing: combinational.
//
// From the paper: nibble pairs of the two data matrices addressing one S-box,
// and several S-boxes in parallel to speed Subbyte up. The paper does not say
// how many; 16 (one per cross-point, one state per step) is this design's
// choice and the only value the module supports.
module aes_imc_subbyte
  import aes_imc_pkg::*;
#(
  parameter int unsigned NSBOX = 16
) (
  input  plane_t in_sub1,
  input  plane_t in_sub2,
  output plane_t out_sub1,
  output plane_t out_sub2
);

  if (NSBOX != CELLS) begin : g_bad_nsbox
    $error("aes_imc_subbyte supports only NSBOX == 16");
  end

  for (genvar n = 0; n < NSBOX; n++) begin : g_sbox
    byte_t addr, data;
    assign addr = {in_sub1[63-4*n -: 4], in_sub2[63-4*n -: 4]};
    aes_imc_sbox u_sbox (.addr(addr), .data(data));
    assign out_sub1[63-4*n -: 4] = data[7:4];
    assign out_sub2[63-4*n -: 4] = data[3:0];
  end

endmodule
