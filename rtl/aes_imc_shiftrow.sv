// aes_imc_shiftrow: Shiftrow on one 64-bit nibble plane by address offsets.
//
// Shiftrow moves no data through logic: each substituted nibble is written back
// to the crossbar at a column address offset by its row number. The nibble
// read from row r, column c is written to row r, column (c - r) mod 4, so row 0
// stays, row 1 rotates left by one cross-point, row 2 by two and row 3 by
// three, which is the AES ShiftRows step applied to that plane. The module is
// the address decoder: for every destination it forms the source column
// (c + r) mod 4 and selects that nibble.
//
// Interface: `in_shift` plane in, `out_shift` plane out. Timing:
// combinational. Two instances, one per plane, use identical offsets, so the
// two halves of every byte stay together.
//
// From the paper: Shiftrow realised by combining an offset with the column
// address, rows shifted by 0, 1, 2 and 3. The column-major cell numbering is
// this design's choice, fixed so that the result equals FIPS-197.
module aes_imc_shiftrow
  import aes_imc_pkg::*;
(
  input  plane_t in_shift,
  output plane_t out_shift
);

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        int src_col, dst, src;
        src_col = (c + r) % COLS;        // column address plus row offset
        dst     = COLS*c + r;
        src     = COLS*src_col + r;
        out_shift[63-4*dst -: 4] = in_shift[63-4*src -: 4];
      end
    end
  end

endmodule
