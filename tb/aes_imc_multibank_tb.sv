// aes_imc_multibank_tb: self-checking test of the multi-bank array with a
// shared key generator. Each batch loads NBANKS different plaintexts under one
// key and checks every bank's ciphertext against the reference model, the
// 26-edge latency, busy/ready, the controller's state and round outputs, that a start while busy is ignored, and that
// the outputs hold while ready. Batches include FIPS-197 C.1 and appendix B
// in different banks, identical plaintexts in all banks, and random data.
module aes_imc_multibank_tb;
  import aes_ref_pkg::*;

  localparam int NB      = 4;   // the default NBANKS
  localparam int LATENCY = 26;

  logic clk = 0, rst, start, busy, ready;
  logic [63:0] key1, key2;
  logic [NB-1:0][63:0] input1, input2, out1, out2;
  logic [127:0] pts [NB];
  aes_imc_pkg::ctrl_state_e state;
  logic [3:0] round;
  int checks = 0, failures = 0;

  aes_imc_multibank dut (
    .clk(clk), .rst(rst), .start(start), .key1(key1), .key2(key2),
    .input1(input1), .input2(input2), .out1(out1), .out2(out2),
    .busy(busy), .ready(ready), .state(state), .round(round));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic run_batch(logic [127:0] key, bit poke);
    int cyc = 0, max_round = 0;
    logic [127:0] exp, got;
    for (int b = 0; b < NB; b++) begin
      input1[b] = plane_hi(pts[b]);
      input2[b] = plane_lo(pts[b]);
    end
    key1 = plane_hi(key); key2 = plane_lo(key);
    start = 1;
    @(posedge clk); #1; cyc++;
    start = 0;
    check(busy && !ready, "busy after start");
    while (!ready && cyc < 200) begin
      if (poke && cyc == 10) begin
        start = 1;
        input1 = ~input1;          // must not be loaded
      end
      @(posedge clk); #1; cyc++;
      start = 0;
      if (int'(round) > max_round) max_round = int'(round);
    end
    check(state == aes_imc_pkg::ST_READY && max_round == 10,
          $sformatf("state %0d, last round %0d", state, max_round));
    check(cyc == LATENCY, $sformatf("latency %0d expected %0d", cyc, LATENCY));
    if (poke)
      for (int b = 0; b < NB; b++) input1[b] = plane_hi(pts[b]);
    for (int b = 0; b < NB; b++) begin
      exp = aes128_encrypt(pts[b], key);
      got = join_planes(out1[b], out2[b]);
      check(got === exp, $sformatf("bank %0d pt %h key %h got %h exp %h",
                                   b, pts[b], key, got, exp));
    end
    // Outputs hold while ready, even with new inputs on the ports.
    input1 = '0; input2 = '0;
    repeat (3) @(posedge clk); #1;
    check(ready && !busy, "ready holds");
    for (int b = 0; b < NB; b++)
      check(join_planes(out1[b], out2[b]) === aes128_encrypt(pts[b], key),
            $sformatf("bank %0d output held", b));
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    rst = 1; start = 0; input1 = '0; input2 = '0; key1 = 0; key2 = 0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    check(!busy && !ready, "idle after reset");

    pts[0] = 128'h00112233445566778899aabbccddeeff;
    pts[1] = 128'h3243f6a8885a308d313198a2e0370734;
    pts[2] = 128'h0;
    pts[3] = 128'hffffffffffffffffffffffffffffffff;
    run_batch(128'h000102030405060708090a0b0c0d0e0f, 0);
    check(out1[0] === 64'h6ced6703dcb87bc5 && out2[0] === 64'h9408ab408d70045a, "C.1 planes in bank 0");

    pts[0] = 128'h0;
    pts[1] = 128'h00112233445566778899aabbccddeeff;
    pts[2] = 128'h3243f6a8885a308d313198a2e0370734;
    pts[3] = 128'h3243f6a8885a308d313198a2e0370734;
    run_batch(128'h2b7e151628aed2a6abf7158809cf4f3c, 1);
    check(join_planes(out1[2], out2[2]) === 128'h3925841d02dc09fbdc118597196a0b32, "appendix B in bank 2");

    for (int i = 0; i < 30; i++) begin
      for (int b = 0; b < NB; b++) pts[b] = rand128();
      run_batch(rand128(), i % 5 == 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
