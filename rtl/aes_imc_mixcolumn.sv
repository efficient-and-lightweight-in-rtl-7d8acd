// aes_imc_mixcolumn: Mixcolumn on the two nibble planes of the AES state.
//
// For each column j the four bytes S0..S3 (high nibbles from plane 1, low
// nibbles from plane 2) are multiplied by the fixed MixColumns matrix. The
// product is decomposed into multiply-by-2 (M-2) operations and XORs only:
//
//   Tj   = S0 ^ S1 ^ S2 ^ S3
//   S'0  = Tj ^ 2*S0 ^ 2*S1 ^ S0        S'1 = Tj ^ 2*S1 ^ 2*S2 ^ S1
//   S'2  = Tj ^ 2*S2 ^ 2*S3 ^ S2        S'3 = Tj ^ 2*S0 ^ 2*S3 ^ S3
//
// which equals the usual 2-3-1-1 matrix because 3*S = 2*S ^ S. M-2 is the
// left shift with conditional XOR of 0x1B. Its carry in and out crosses the
// two planes (bit 7 of a byte is bit 3 of the plane-1 nibble), so the two
// processing units exchange one bit per byte here. All four columns are
// processed at once (four M-2 units per column).
//
// Interface: `in_mix1`/`in_mix2` in, `out_mix1`/`out_mix2` out. Timing:
// combinational.
//
// From the paper: equations (1)-(4), M-2 plus XOR, Tj shared by a column.
// Evaluating all columns in parallel in one step, rather than through buffer
// rows over several steps, is this design's choice.
module aes_imc_mixcolumn
  import aes_imc_pkg::*;
(
  input  plane_t in_mix1,
  input  plane_t in_mix2,
  output plane_t out_mix1,
  output plane_t out_mix2
);

  always_comb begin
    for (int j = 0; j < COLS; j++) begin
      byte_t s  [4];
      byte_t m2 [4];
      byte_t sp [4];
      byte_t t;
      for (int i = 0; i < 4; i++) begin
        s[i]  = get_byte(in_mix1, in_mix2, 4*j + i);
        m2[i] = xtime(s[i]);
      end
      t = s[0] ^ s[1] ^ s[2] ^ s[3];
      sp[0] = t ^ m2[0] ^ m2[1] ^ s[0];
      sp[1] = t ^ m2[1] ^ m2[2] ^ s[1];
      sp[2] = t ^ m2[2] ^ m2[3] ^ s[2];
      sp[3] = t ^ m2[0] ^ m2[3] ^ s[3];
      for (int i = 0; i < 4; i++) begin
        out_mix1[63-4*(4*j+i) -: 4] = sp[i][7:4];
        out_mix2[63-4*(4*j+i) -: 4] = sp[i][3:0];
      end
    end
  end

endmodule
