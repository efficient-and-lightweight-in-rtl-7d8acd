// aes_imc_pkg: types and constants shared by the AES-IMC core.
//
// The core keeps the 128-bit AES state as two 64-bit "nibble planes". Plane 1
// holds the high nibble of every state byte, plane 2 the low nibble, so that
// each 4-bit cross-point of a 4x4 crossbar stores half of one byte. Byte n of
// the FIPS-197 state (n = 0 first on the wire) lives in nibble n of each plane,
// at bits [63-4n -: 4], and at crossbar row n%4, column n/4 (FIPS-197
// column-major order).
//
// The GF(2^8) helpers follow the usual AES definitions: multiplication by 2 is
// a left shift with conditional XOR of 0x1B (reduction by x^8+x^4+x^3+x+1),
// and the S-box is the multiplicative inverse followed by the affine map. The
// S-box table is computed here at elaboration time, so no data file is needed;
// the paper stores the same 256 values in a ROM.
package aes_imc_pkg;

  typedef logic [3:0]  nibble_t;
  typedef logic [7:0]  byte_t;
  typedef logic [63:0] plane_t;
  typedef logic [255:0][7:0] sbox_table_t;

  localparam int unsigned ROWS   = 4;   // crossbar rows (state matrix rows)
  localparam int unsigned COLS   = 4;   // crossbar columns (state matrix columns)
  localparam int unsigned CELLS  = ROWS * COLS;
  localparam int unsigned NROUND = 10;  // AES-128

  // Controller states. K00 is the initial Addroundkey, K01..K10 the rounds
  // (the names are the ones printed in the prototype's simulation trace).
  typedef enum logic [3:0] {
    ST_IDLE  = 4'd0,
    ST_LOAD  = 4'd1,
    ST_K00   = 4'd2,
    ST_ROUND = 4'd3,
    ST_OUT   = 4'd4,
    ST_READY = 4'd5
  } ctrl_state_e;

  // Nibble n of a plane (n = 0 is the most significant).
  function automatic nibble_t get_nib(plane_t p, int unsigned n);
    return p[63-4*n -: 4];
  endfunction

  // Byte n of the 128-bit state held in the two planes.
  function automatic byte_t get_byte(plane_t hi, plane_t lo, int unsigned n);
    return {hi[63-4*n -: 4], lo[63-4*n -: 4]};
  endfunction

  // GF(2^8) multiplication by 2 (the M-2 operation).
  function automatic byte_t xtime(byte_t b);
    return {b[6:0], 1'b0} ^ (b[7] ? 8'h1B : 8'h00);
  endfunction

  // General GF(2^8) product, used only to build the S-box table.
  function automatic byte_t gf_mul(byte_t a, byte_t b);
    byte_t acc = 8'h00;
    byte_t x   = a;
    for (int i = 0; i < 8; i++) begin
      if (b[i]) acc ^= x;
      x = xtime(x);
    end
    return acc;
  endfunction

  // Multiplicative inverse as a^254 (0 maps to 0).
  function automatic byte_t gf_inv(byte_t a);
    byte_t r = 8'h01;
    byte_t p = a;
    for (int i = 0; i < 8; i++) begin
      if (i != 0) r = gf_mul(r, p);  // 254 = 0b11111110
      p = gf_mul(p, p);
    end
    return r;
  endfunction

  function automatic byte_t sbox_calc(byte_t a);
    byte_t v = gf_inv(a);
    byte_t s;
    for (int i = 0; i < 8; i++)
      s[i] = v[i] ^ v[(i+4)%8] ^ v[(i+5)%8] ^ v[(i+6)%8] ^ v[(i+7)%8];
    return s ^ 8'h63;
  endfunction

  function automatic sbox_table_t make_sbox_table();
    sbox_table_t t;
    for (int i = 0; i < 256; i++) t[i] = sbox_calc(byte_t'(i));
    return t;
  endfunction

  // Round constant of round r (1..10): x^(r-1) in GF(2^8).
  function automatic byte_t rcon(int unsigned r);
    byte_t c = 8'h01;
    for (int unsigned i = 1; i < r; i++) c = xtime(c);
    return c;
  endfunction

  // Row r of a plane as 16 bits, column 0 in the top nibble.
  function automatic logic [15:0] get_row(plane_t p, int unsigned r);
    logic [15:0] v;
    for (int unsigned c = 0; c < COLS; c++) v[15-4*c -: 4] = p[63-4*(COLS*c+r) -: 4];
    return v;
  endfunction

  // A plane whose row r is `v` (other rows zero), for a word-line write of row r.
  function automatic plane_t put_row(logic [15:0] v, int unsigned r);
    plane_t p = '0;
    for (int unsigned c = 0; c < COLS; c++) p[63-4*(COLS*c+r) -: 4] = v[15-4*c -: 4];
    return p;
  endfunction

endpackage
