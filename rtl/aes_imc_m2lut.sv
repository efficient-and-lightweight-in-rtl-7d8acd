// aes_imc_m2lut: multiplication-by-2 lookup table in GF(2^8).
//
// A 256 x 8 read-only table whose entry b is 2*b in GF(2^8), i.e. b shifted
// left once and XORed with 0x1B when bit 7 of b was set (reduction by
// x^8+x^4+x^3+x+1). The address is the byte formed from one nibble of each
// plane, like the S-box. The row-sequential engine uses four of these to turn
// a crossbar row into its M-2 row in one step. The contents are computed at
// elaboration from aes_imc_pkg::xtime.
//
// Timing: combinational.
//
// From the paper: Mixcolumn's M-2 step done by a lookup table sharing the
// S-box's address decoding, several LUTs in parallel. Four per row is this
// design's choice.
module aes_imc_m2lut
  import aes_imc_pkg::*;
(
  input  byte_t addr,
  output byte_t data
);

  function automatic sbox_table_t make_m2_table();
    sbox_table_t t;
    for (int i = 0; i < 256; i++) t[i] = xtime(byte_t'(i));
    return t;
  endfunction

  localparam sbox_table_t M2 = make_m2_table();

  assign data = M2[addr];

endmodule
