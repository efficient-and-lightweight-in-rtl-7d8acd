// aes_ref_pkg: independent AES-128 reference model for the testbenches.
//
// Works on plain 128-bit blocks (byte 0 in bits [127:120]) the way FIPS-197
// writes the cipher: bytes, a 4x4 state, and the four round steps. The S-box is
// found by searching for the multiplicative inverse and rotating for the
// affine map, so it shares no code with the design. Also converts between a
// 128-bit block and the two nibble planes the design uses (plane 1 = high
// nibbles, plane 2 = low nibbles, nibble n of each plane = byte n).
package aes_ref_pkg;

  function automatic logic [7:0] r_mul(logic [7:0] a, logic [7:0] b);
    logic [15:0] p = '0;
    for (int i = 0; i < 8; i++) if (b[i]) p ^= (16'(a) << i);
    for (int i = 15; i >= 8; i--) if (p[i]) p ^= (16'h011B << (i - 8));
    return p[7:0];
  endfunction

  function automatic logic [7:0] r_rotl(logic [7:0] b, int n);
    return (b << n) | (b >> (8 - n));
  endfunction

  function automatic logic [7:0] r_sbox(logic [7:0] a);
    logic [7:0] inv = 8'h00;
    if (a != 0)
      for (int g = 1; g < 256; g++)
        if (r_mul(a, 8'(g)) == 8'h01) inv = 8'(g);
    return inv ^ r_rotl(inv, 1) ^ r_rotl(inv, 2) ^ r_rotl(inv, 3) ^ r_rotl(inv, 4) ^ 8'h63;
  endfunction

  // Precomputed once per simulation by ref_init().
  logic [7:0] sb [256];
  bit         sb_ready = 0;

  function automatic void ref_init();
    if (!sb_ready) begin
      for (int i = 0; i < 256; i++) sb[i] = r_sbox(8'(i));
      sb_ready = 1;
    end
  endfunction

  function automatic logic [7:0] bget(logic [127:0] x, int n);
    return x[127-8*n -: 8];
  endfunction

  function automatic logic [127:0] sub_bytes(logic [127:0] x);
    logic [127:0] y;
    for (int n = 0; n < 16; n++) y[127-8*n -: 8] = sb[bget(x, n)];
    return y;
  endfunction

  // Byte n is at row n%4, column n/4.
  function automatic logic [127:0] shift_rows(logic [127:0] x);
    logic [127:0] y;
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 4; c++)
        y[127-8*(4*c+r) -: 8] = bget(x, 4*((c + r) % 4) + r);
    return y;
  endfunction

  function automatic logic [127:0] mix_columns(logic [127:0] x);
    logic [127:0] y;
    logic [7:0] s [4];
    for (int c = 0; c < 4; c++) begin
      for (int r = 0; r < 4; r++) s[r] = bget(x, 4*c + r);
      y[127-8*(4*c+0) -: 8] = r_mul(2, s[0]) ^ r_mul(3, s[1]) ^ s[2] ^ s[3];
      y[127-8*(4*c+1) -: 8] = s[0] ^ r_mul(2, s[1]) ^ r_mul(3, s[2]) ^ s[3];
      y[127-8*(4*c+2) -: 8] = s[0] ^ s[1] ^ r_mul(2, s[2]) ^ r_mul(3, s[3]);
      y[127-8*(4*c+3) -: 8] = r_mul(3, s[0]) ^ s[1] ^ s[2] ^ r_mul(2, s[3]);
    end
    return y;
  endfunction

  // Next AES-128 round key from the previous one and the round number (1..10).
  function automatic logic [127:0] next_key(logic [127:0] k, int rnd);
    logic [31:0] w [4];
    logic [31:0] t;
    logic [7:0]  rc = 8'h01;
    for (int i = 1; i < rnd; i++) rc = r_mul(rc, 8'h02);
    for (int i = 0; i < 4; i++) w[i] = k[127-32*i -: 32];
    t = {w[3][23:0], w[3][31:24]};
    t = {sb[t[31:24]], sb[t[23:16]], sb[t[15:8]], sb[t[7:0]]} ^ {rc, 24'h0};
    w[0] ^= t; w[1] ^= w[0]; w[2] ^= w[1]; w[3] ^= w[2];
    return {w[0], w[1], w[2], w[3]};
  endfunction

  function automatic logic [127:0] aes128_encrypt(logic [127:0] pt, logic [127:0] key);
    logic [127:0] s = pt ^ key;
    logic [127:0] k = key;
    ref_init();
    for (int r = 1; r <= 10; r++) begin
      k = next_key(k, r);
      s = shift_rows(sub_bytes(s));
      if (r != 10) s = mix_columns(s);
      s ^= k;
    end
    return s;
  endfunction

  function automatic logic [63:0] plane_hi(logic [127:0] x);
    logic [63:0] p;
    for (int n = 0; n < 16; n++) p[63-4*n -: 4] = x[127-8*n -: 4];
    return p;
  endfunction

  function automatic logic [63:0] plane_lo(logic [127:0] x);
    logic [63:0] p;
    for (int n = 0; n < 16; n++) p[63-4*n -: 4] = x[123-8*n -: 4];
    return p;
  endfunction

  function automatic logic [127:0] join_planes(logic [63:0] hi, logic [63:0] lo);
    logic [127:0] x;
    for (int n = 0; n < 16; n++) x[127-8*n -: 8] = {hi[63-4*n -: 4], lo[63-4*n -: 4]};
    return x;
  endfunction

  function automatic logic [127:0] rand128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

endpackage
