// aes_imc_sbox: one 256 x 8 S-box lookup table.
//
// The address is the byte formed from one 4-bit cross-point of each nibble
// plane ({plane-1 nibble, plane-2 nibble}); the data is the AES substitution
// of that byte, which the caller splits back into the two planes. The table is
// a read-only memory whose 256 entries are computed at elaboration from the
// AES definition (multiplicative inverse in GF(2^8) modulo x^8+x^4+x^3+x+1,
// then the affine map with constant 0x63), see aes_imc_pkg::sbox_calc.
//
// Timing: purely combinational (asynchronous ROM read).
//
// From the paper: a pre-computed 256-entry S-box ROM with an 8-bit address
// made of the two 4-bit cells. Computing the contents in SystemVerilog instead
// of loading a vendor coefficient file is this design's choice.
module aes_imc_sbox
  import aes_imc_pkg::*;
(
  input  byte_t addr,
  output byte_t data
);

  localparam sbox_table_t SBOX = make_sbox_table();

  assign data = SBOX[addr];

endmodule
