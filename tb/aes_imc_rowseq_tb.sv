// aes_imc_rowseq_tb: self-checking test of the row-sequential engine.
// Encrypts the FIPS-197 C.1 and appendix B blocks and random blocks, checks
// each ciphertext against the reference model and each block's latency
// (232 edges from start to ready), and that a start while busy is ignored.
module aes_imc_rowseq_tb;
  import aes_ref_pkg::*;

  localparam int LATENCY = 1 + 1 + 9*24 + 9 + 4 + 1;

  logic clk = 0, rst, start, busy, ready;
  logic [63:0] input1, input2, key1, key2, out1, out2;
  int checks = 0, failures = 0;

  aes_imc_rowseq dut (.clk(clk), .rst(rst), .start(start), .input1(input1), .input2(input2),
                      .key1(key1), .key2(key2), .out1(out1), .out2(out2),
                      .busy(busy), .ready(ready));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  task automatic encrypt(logic [127:0] pt, logic [127:0] key, bit poke);
    int cyc = 0;
    logic [127:0] exp, got;
    exp = aes128_encrypt(pt, key);
    input1 = plane_hi(pt); input2 = plane_lo(pt);
    key1 = plane_hi(key); key2 = plane_lo(key);
    start = 1;
    @(posedge clk); #1; cyc++;
    start = 0;
    check(busy, "busy after start");
    while (!ready && cyc < 1000) begin
      if (poke && cyc == 50) start = 1;
      @(posedge clk); #1; cyc++;
      start = 0;
    end
    got = join_planes(out1, out2);
    check(got === exp, $sformatf("pt %h key %h got %h exp %h", pt, key, got, exp));
    check(cyc == LATENCY, $sformatf("latency %0d expected %0d", cyc, LATENCY));
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    rst = 1; start = 0; input1 = 0; input2 = 0; key1 = 0; key2 = 0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    check(!busy && !ready, "idle after reset");
    encrypt(128'h00112233445566778899aabbccddeeff, 128'h000102030405060708090a0b0c0d0e0f, 0);
    check(out1 === 64'h6ced6703dcb87bc5 && out2 === 64'h9408ab408d70045a, "C.1 planes");
    encrypt(128'h3243f6a8885a308d313198a2e0370734, 128'h2b7e151628aed2a6abf7158809cf4f3c, 1);
    for (int i = 0; i < 40; i++) encrypt(rand128(), rand128(), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
