// aes_imc_top_tb: end-to-end test of the AES-IMC core at its default (and
// only) configuration.
//
// Encrypts the FIPS-197 appendix C.1 block (plaintext 00112233..ff, key
// 00010203..0f), checking the two output planes against the literal values
// 6ced6703dcb87bc5 / 9408ab408d70045a, then the FIPS-197 appendix B block and
// random blocks against the reference model. Each block must take 26 clock
// edges from start to ready (232 in row-sequential mode). It also exercises and counts: rounds through
// Mixcolumn (1..9), the Mixcolumn bypass of round 10, back-to-back blocks
// started from READY, a start pulse while busy (ignored) and a reset in the
// middle of a block, blocks run by the row-sequential engine (row_mode) and
// switches between the two engines. A mechanism that never happens counts as
// a failure.
module aes_imc_top_tb;
  import aes_ref_pkg::*;
  import aes_imc_pkg::*;

  localparam int NRANDOM = 200;
  localparam int LATENCY = 26;
  localparam int ROW_LATENCY = 232;

  logic clk = 0, reset, start, ready, row_mode = 0;
  logic [63:0] input1, input2, key1, key2, finalout1, finalout2;
  logic [3:0]  current_state, current_round;
  int checks = 0, failures = 0;
  int n_mix_rounds = 0, n_bypass_rounds = 0, n_back_to_back = 0;
  int n_busy_start = 0, n_mid_reset = 0, n_blocks = 0;
  int n_row_blocks = 0, n_mode_switch = 0;
  bit last_mode = 0;

  aes_imc_top dut (.clk(clk), .reset(reset), .start(start), .row_mode(row_mode),
                   .input1(input1), .input2(input2), .key1(key1), .key2(key2),
                   .finalout1(finalout1), .finalout2(finalout2), .ready(ready),
                   .current_state(current_state), .current_round(current_round));

  always #5 clk = ~clk;

  // Count rounds by the path they take (one count per round step).
  logic [3:0] prev_round = 0;
  always @(posedge clk) begin
    if (!reset && current_state == 4'(ST_ROUND) && current_round != prev_round) begin
      if (current_round == 4'(NROUND)) n_bypass_rounds++;
      else                              n_mix_rounds++;
    end
    prev_round <= (current_state == 4'(ST_ROUND)) ? current_round : 4'd0;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // One block; start is raised for one cycle. Optionally pokes start while
  // busy. Returns through `got` the joined ciphertext.
  task automatic encrypt(logic [127:0] pt, logic [127:0] key, bit poke,
                         output logic [127:0] got);
    int cyc = 0;
    input1 = plane_hi(pt); input2 = plane_lo(pt);
    key1   = plane_hi(key); key2  = plane_lo(key);
    if (ready) n_back_to_back++;
    if (n_blocks > 0 && row_mode != last_mode) n_mode_switch++;
    last_mode = row_mode;
    if (row_mode) n_row_blocks++;
    start = 1;
    @(posedge clk); #1; cyc++;
    start = 0;
    while (!ready && cyc < 1000) begin
      if (poke && cyc == 10) begin
        start = 1;
        input1 = ~input1;          // must not be taken
        n_busy_start++;
      end
      @(posedge clk); #1; cyc++;
      start = 0;
    end
    check(cyc == (row_mode ? ROW_LATENCY : LATENCY),
          $sformatf("latency %0d expected %0d (row_mode %0d)", cyc, row_mode ? ROW_LATENCY : LATENCY, row_mode));
    got = join_planes(finalout1, finalout2);
    n_blocks++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [127:0] pt, key, got, exp;
    ref_init();
    reset = 1; start = 0;
    input1 = 0; input2 = 0; key1 = 0; key2 = 0;
    repeat (2) @(posedge clk); #1;
    reset = 0;
    check(!ready, "not ready after reset");

    // FIPS-197 C.1, plane form of the outputs given literally.
    encrypt(128'h00112233445566778899aabbccddeeff, 128'h000102030405060708090a0b0c0d0e0f, 0, got);
    check(finalout1 === 64'h6ced6703dcb87bc5, $sformatf("C.1 finalout1 %h", finalout1));
    check(finalout2 === 64'h9408ab408d70045a, $sformatf("C.1 finalout2 %h", finalout2));
    check(got === 128'h69c4e0d86a7b0430d8cdb78070b4c55a, "C.1 ciphertext");

    // FIPS-197 appendix B, started directly from READY, with a busy start.
    encrypt(128'h3243f6a8885a308d313198a2e0370734, 128'h2b7e151628aed2a6abf7158809cf4f3c, 1, got);
    check(got === 128'h3925841d02dc09fbdc118597196a0b32, $sformatf("B ciphertext %h", got));
    repeat (5) @(posedge clk); #1;
    check(ready && join_planes(finalout1, finalout2) == got, "output held while ready");

    // FIPS-197 C.1 again, by the row-sequential engine.
    row_mode = 1;
    encrypt(128'h00112233445566778899aabbccddeeff, 128'h000102030405060708090a0b0c0d0e0f, 1, got);
    check(finalout1 === 64'h6ced6703dcb87bc5 && finalout2 === 64'h9408ab408d70045a, "C.1 row mode");
    row_mode = 0;

    // Reset in the middle of a block, then a clean block.
    input1 = 64'h1; start = 1;
    @(posedge clk); #1; start = 0;
    repeat (9) @(posedge clk); #1;
    reset = 1; @(posedge clk); #1; reset = 0;
    n_mid_reset++;
    check(!ready && current_state == 4'(ST_IDLE), "mid-block reset returns to idle");
    check(finalout1 == 0 && finalout2 == 0, "reset clears output");

    for (int i = 0; i < NRANDOM; i++) begin
      pt = rand128(); key = rand128();
      exp = aes128_encrypt(pt, key);
      row_mode = (i % 7) >= 5;
      encrypt(pt, key, (i % 17) == 3, got);
      check(got === exp, $sformatf("random %0d: pt %h key %h got %h exp %h", i, pt, key, got, exp));
      if ((i % 5) == 0) begin
        repeat ($urandom_range(1, 4)) @(posedge clk);
        #1;
      end
    end

    check(n_mix_rounds >= 9, "rounds through Mixcolumn happened");
    check(n_bypass_rounds >= 1, "round-10 Mixcolumn bypass happened");
    check(n_back_to_back >= 1, "back-to-back block from READY happened");
    check(n_busy_start >= 1, "start while busy happened");
    check(n_mid_reset >= 1, "mid-block reset happened");
    check(n_row_blocks >= 1, "row-sequential block happened");
    check(n_mode_switch >= 2, "mode switches happened");
    $display("blocks=%0d mix_rounds=%0d bypass_rounds=%0d back_to_back=%0d busy_starts=%0d mid_resets=%0d row_blocks=%0d mode_switches=%0d",
             n_blocks, n_mix_rounds, n_bypass_rounds, n_back_to_back, n_busy_start, n_mid_reset, n_row_blocks, n_mode_switch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
