// aes_imc_keygen: AES-128 round-key generator working on two nibble planes.
//
// The round key is held like the state: key plane 1 has the high nibble of
// every key byte, key plane 2 the low nibble. Word Wk (k = 0..3) of a round key
// is column k of the 4x4 crossbar. From the previous round key W0..W3 and the
// round constant, the next key is
//
//   t   = SubWord(RotWord(W3)) ^ {rcon, 00, 00, 00}
//   W0' = W0 ^ t,  W1' = W1 ^ W0',  W2' = W2 ^ W1',  W3' = W3 ^ W2'
//
// RotWord rotates the word left by one byte; SubWord passes its four bytes
// through four S-box tables addressed by nibble pairs of the two planes, like
// Subbyte. Only the S-box step needs both planes; the XOR chain is nibble-wise.
//
// Interface: `key1`/`key2` current round key, `rcon_in` the constant of the
// round being generated (01, 02, 04, ... 36), `next1`/`next2` the new key.
// Timing: combinational; the caller overwrites the key crossbars with it.
//
// From the paper: RotWord, SubWord, rcon and the XOR chain, a key generator
// shared by the two 64-bit units, round keys overwriting the key array. The
// nibble-plane form is the one the two 64-bit units imply.
module aes_imc_keygen
  import aes_imc_pkg::*;
(
  input  plane_t key1,
  input  plane_t key2,
  input  byte_t  rcon_in,
  output plane_t next1,
  output plane_t next2
);

  // Column k of a plane: 16 bits, row 0 first.
  function automatic logic [15:0] col_of(plane_t p, int k);
    return p[63-16*k -: 16];
  endfunction

  // RotWord of W3: rows 1,2,3,0 of column 3, as S-box addresses.
  byte_t sub_addr [4];
  byte_t sub_data [4];

  for (genvar i = 0; i < 4; i++) begin : g_subword
    localparam int unsigned SRC = 12 + (i + 1) % 4;   // nibble index in plane
    assign sub_addr[i] = {key1[63-4*SRC -: 4], key2[63-4*SRC -: 4]};
    aes_imc_sbox u_sbox (.addr(sub_addr[i]), .data(sub_data[i]));
  end

  always_comb begin
    logic [15:0] t1, t2;           // temporary word t, split in planes
    logic [15:0] w1 [4];
    logic [15:0] w2 [4];
    t1 = {sub_data[0][7:4] ^ rcon_in[7:4], sub_data[1][7:4],
          sub_data[2][7:4], sub_data[3][7:4]};
    t2 = {sub_data[0][3:0] ^ rcon_in[3:0], sub_data[1][3:0],
          sub_data[2][3:0], sub_data[3][3:0]};
    w1[0] = col_of(key1, 0) ^ t1;
    w2[0] = col_of(key2, 0) ^ t2;
    for (int k = 1; k < 4; k++) begin
      w1[k] = col_of(key1, k) ^ w1[k-1];
      w2[k] = col_of(key2, k) ^ w2[k-1];
    end
    next1 = {w1[0], w1[1], w1[2], w1[3]};
    next2 = {w2[0], w2[1], w2[2], w2[3]};
  end

endmodule
