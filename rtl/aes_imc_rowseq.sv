// aes_imc_rowseq: row-sequential in-array AES-128 engine on nibble planes.
//
// The same cipher as the pipelined datapath, but computed the way a memristive
// crossbar does it: one word line (state row) at a time through the column
// sense amplifiers, with intermediate values kept in spare crossbar rows
// instead of logic registers. Each plane has a state array (S), a key array
// (K), an M-2 buffer array (B, four buffer rows) and a Tj buffer array (T,
// row 0 used). Per round r (1..10):
//
//   A  for each row i: the SAs XOR state row i with key row i (Addroundkey of
//      the previous key), four S-boxes substitute the row's four bytes right
//      away, and Shiftrow is applied by writing each result into the row
//      buffer at column address (c - i) mod 4; the row buffer is then written
//      back to state row i.                               (2 cycles per row)
//   KEY the key generator overwrites K with round key r.            (1 cycle)
//   M2 (rounds 1..9) for each row i: four M-2 LUTs turn state row i into
//      2*row i, latched in the row buffer, then written to buffer row B[i].
//                                                         (2 cycles per row)
//   TJ T[0] := S[0]^S[1], then T[0] ^= S[2], then T[0] ^= S[3].   (3 cycles)
//   MIX for each row i: S[i] := T[0] ^ B[i] ^ B[(i+1)%4] ^ S[i]     (1 cycle/row)
//
// After round 10 a last pass XORs every state row with key row i (round key
// 10), and OUT copies the state to the output register. A block takes
// 1 + 1 + 9*24 + 9 + 4 + 1 = 232 clock edges from the edge that samples
// `start` to the edge that raises `ready`.
//
// Interface: as the core (planes input1/2, key1/2 in, out1/2 out). `start`
// is taken in IDLE or READY; `busy` is high from the accepting edge until
// `ready` rises; `ready` holds until the next start. `rst` synchronous.
//
// From the paper: the order of the row operations (SA XOR of a data row and a
// key row, Subbyte immediately after Addroundkey of the same row, Shiftrow by
// column-address offset into a row buffer that is written back, M-2 by LUT
// into vacant buffer rows, Tj by XOR of two rows at a time into a buffer row,
// four-operand XOR written back over S_i, round keys overwriting the key
// array). The cycle per operation, four S-boxes and four M-2 LUTs per row
// and one write-back cycle per row are this design's choices; the paper gives
// no counts and speaks of six steps for the final Mixcolumn XOR, where one
// four-input SA step is used here.
module aes_imc_rowseq
  import aes_imc_pkg::*;
(
  input  logic   clk,
  input  logic   rst,
  input  logic   start,
  input  plane_t input1,
  input  plane_t input2,
  input  plane_t key1,
  input  plane_t key2,
  output plane_t out1,
  output plane_t out2,
  output logic   busy,
  output logic   ready
);

  typedef enum logic [3:0] {
    R_IDLE, R_LOAD, R_A_LATCH, R_A_WRITE, R_KEY, R_M2_LATCH, R_M2_WRITE,
    R_TJ, R_MIX, R_FARK, R_OUT, R_READY
  } rs_state_e;

  rs_state_e   st_q, st_d;
  logic [1:0]  row_q, row_d;        // word line in use
  logic [3:0]  round_q, round_d;
  logic [1:0]  tj_q, tj_d;          // Tj step
  logic [15:0] rb1_q, rb2_q, rb1_d, rb2_d;   // row buffers, one per plane

  // ---- arrays ---------------------------------------------------------------
  plane_t s1_q, s2_q, k1_q, k2_q, b1_q, b2_q, t1_q, t2_q;
  plane_t s1_d, s2_d, k1_d, k2_d, b1_d, b2_d, t1_d, t2_d;
  logic [3:0] s_we, k_we, b_we, t_we;

  mr_crossbar u_s1 (.clk(clk), .rst(rst), .wl_we(s_we), .wdata(s1_d), .rdata(s1_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_s2 (.clk(clk), .rst(rst), .wl_we(s_we), .wdata(s2_d), .rdata(s2_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_k1 (.clk(clk), .rst(rst), .wl_we(k_we), .wdata(k1_d), .rdata(k1_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_k2 (.clk(clk), .rst(rst), .wl_we(k_we), .wdata(k2_d), .rdata(k2_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_b1 (.clk(clk), .rst(rst), .wl_we(b_we), .wdata(b1_d), .rdata(b1_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_b2 (.clk(clk), .rst(rst), .wl_we(b_we), .wdata(b2_d), .rdata(b2_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_t1 (.clk(clk), .rst(rst), .wl_we(t_we), .wdata(t1_d), .rdata(t1_q), .bl_sel(2'd0), .bl_data());
  mr_crossbar u_t2 (.clk(clk), .rst(rst), .wl_we(t_we), .wdata(t2_d), .rdata(t2_q), .bl_sel(2'd0), .bl_data());

  // ---- row read-out through the sense amplifiers ----------------------------
  logic [15:0] srow1, srow2, krow1, krow2, ark1, ark2;
  assign srow1 = get_row(s1_q, int'(row_q));
  assign srow2 = get_row(s2_q, int'(row_q));
  assign krow1 = get_row(k1_q, int'(row_q));
  assign krow2 = get_row(k2_q, int'(row_q));
  assign ark1  = srow1 ^ krow1;
  assign ark2  = srow2 ^ krow2;

  // Four S-boxes and four M-2 LUTs, one per column, addressed by nibble pairs.
  byte_t sub_out [COLS];
  byte_t m2_out  [COLS];
  for (genvar c = 0; c < COLS; c++) begin : g_col
    aes_imc_sbox  u_sbox (.addr({ark1[15-4*c -: 4], ark2[15-4*c -: 4]}), .data(sub_out[c]));
    aes_imc_m2lut u_m2   (.addr({srow1[15-4*c -: 4], srow2[15-4*c -: 4]}), .data(m2_out[c]));
  end

  // Key generator shared by the two key arrays.
  plane_t nk1, nk2;
  aes_imc_keygen u_keygen (.key1(k1_q), .key2(k2_q), .rcon_in(rcon(int'(round_q))),
                           .next1(nk1), .next2(nk2));

  // ---- control and write drivers ---------------------------------------------
  always_comb begin
    logic [1:0] nxt_row;
    logic [15:0] mix1, mix2;
    st_d    = st_q;
    row_d   = row_q;
    round_d = round_q;
    tj_d    = tj_q;
    rb1_d   = rb1_q;
    rb2_d   = rb2_q;
    s_we = '0; k_we = '0; b_we = '0; t_we = '0;
    s1_d = '0; s2_d = '0; k1_d = '0; k2_d = '0;
    b1_d = '0; b2_d = '0; t1_d = '0; t2_d = '0;
    nxt_row = row_q + 2'd1;
    mix1 = get_row(t1_q, 0) ^ get_row(b1_q, int'(row_q)) ^ get_row(b1_q, int'(nxt_row)) ^ srow1;
    mix2 = get_row(t2_q, 0) ^ get_row(b2_q, int'(row_q)) ^ get_row(b2_q, int'(nxt_row)) ^ srow2;

    unique case (st_q)
      R_IDLE, R_READY: if (start) st_d = R_LOAD;

      R_LOAD: begin
        s_we = '1; k_we = '1;
        s1_d = input1; s2_d = input2; k1_d = key1; k2_d = key2;
        round_d = 4'd1; row_d = 2'd0;
        st_d = R_A_LATCH;
      end

      // Addroundkey + Subbyte of one row, Shiftrow by column offset.
      R_A_LATCH: begin
        for (int c = 0; c < COLS; c++) begin
          int dst;
          dst = (c - int'(row_q) + COLS) % COLS;
          rb1_d[15-4*dst -: 4] = sub_out[c][7:4];
          rb2_d[15-4*dst -: 4] = sub_out[c][3:0];
        end
        st_d = R_A_WRITE;
      end
      R_A_WRITE: begin
        s_we[row_q] = 1'b1;
        s1_d = put_row(rb1_q, int'(row_q)); s2_d = put_row(rb2_q, int'(row_q));
        row_d = nxt_row;
        if (row_q == 2'd3) st_d = R_KEY;
        else               st_d = R_A_LATCH;
      end

      R_KEY: begin
        k_we = '1; k1_d = nk1; k2_d = nk2;
        row_d = 2'd0;
        st_d = (round_q == 4'(NROUND)) ? R_FARK : R_M2_LATCH;
      end

      // M-2 of one row into its buffer row.
      R_M2_LATCH: begin
        for (int c = 0; c < COLS; c++) begin
          rb1_d[15-4*c -: 4] = m2_out[c][7:4];
          rb2_d[15-4*c -: 4] = m2_out[c][3:0];
        end
        st_d = R_M2_WRITE;
      end
      R_M2_WRITE: begin
        b_we[row_q] = 1'b1;
        b1_d = put_row(rb1_q, int'(row_q)); b2_d = put_row(rb2_q, int'(row_q));
        row_d = nxt_row;
        if (row_q == 2'd3) begin st_d = R_TJ; tj_d = 2'd0; end
        else                st_d = R_M2_LATCH;
      end

      // Tj accumulated in buffer row T[0], two rows per step.
      R_TJ: begin
        t_we[0] = 1'b1;
        unique case (tj_q)
          2'd0: begin
            t1_d = put_row(get_row(s1_q, 0) ^ get_row(s1_q, 1), 0);
            t2_d = put_row(get_row(s2_q, 0) ^ get_row(s2_q, 1), 0);
          end
          2'd1: begin
            t1_d = put_row(get_row(t1_q, 0) ^ get_row(s1_q, 2), 0);
            t2_d = put_row(get_row(t2_q, 0) ^ get_row(s2_q, 2), 0);
          end
          default: begin
            t1_d = put_row(get_row(t1_q, 0) ^ get_row(s1_q, 3), 0);
            t2_d = put_row(get_row(t2_q, 0) ^ get_row(s2_q, 3), 0);
          end
        endcase
        tj_d = tj_q + 2'd1;
        if (tj_q == 2'd2) begin st_d = R_MIX; row_d = 2'd0; end
      end

      // S'i = Tj ^ 2*Si ^ 2*S(i+1) ^ Si, written back over Si.
      R_MIX: begin
        s_we[row_q] = 1'b1;
        s1_d = put_row(mix1, int'(row_q)); s2_d = put_row(mix2, int'(row_q));
        row_d = nxt_row;
        if (row_q == 2'd3) begin
          st_d = R_A_LATCH;
          round_d = round_q + 4'd1;
        end
      end

      // Final Addroundkey with round key 10.
      R_FARK: begin
        s_we[row_q] = 1'b1;
        s1_d = put_row(ark1, int'(row_q)); s2_d = put_row(ark2, int'(row_q));
        row_d = nxt_row;
        if (row_q == 2'd3) st_d = R_OUT;
      end

      R_OUT: st_d = R_READY;

      default: st_d = R_IDLE;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      st_q    <= R_IDLE;
      row_q   <= '0;
      round_q <= '0;
      tj_q    <= '0;
      rb1_q   <= '0;
      rb2_q   <= '0;
      out1    <= '0;
      out2    <= '0;
    end else begin
      st_q    <= st_d;
      row_q   <= row_d;
      round_q <= round_d;
      tj_q    <= tj_d;
      rb1_q   <= rb1_d;
      rb2_q   <= rb2_d;
      if (st_q == R_OUT) begin
        out1 <= s1_q;
        out2 <= s2_q;
      end
    end
  end

  assign ready = (st_q == R_READY);
  assign busy  = !(st_q == R_IDLE || st_q == R_READY);

  // Row phases drive a single word line of the state array.
  a_one_row: assert property (@(posedge clk) disable iff (rst)
                              (st_q inside {R_A_WRITE, R_MIX, R_FARK}) |-> $onehot(s_we))
    else $error("row phase wrote more than one state row");

endmodule
