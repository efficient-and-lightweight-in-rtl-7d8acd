// aes_imc_shiftrow_tb: Shiftrow on one plane. The expected value is the
// reference ShiftRows of a 128-bit state whose high nibbles are the plane,
// read back as its high-nibble plane.
module aes_imc_shiftrow_tb;
  import aes_ref_pkg::*;
  logic [63:0] pin, pout;
  int checks = 0, failures = 0;

  aes_imc_shiftrow dut (.in_shift(pin), .out_shift(pout));

  task automatic check(logic [63:0] p);
    logic [63:0] exp;
    exp = plane_hi(shift_rows(join_planes(p, 64'h0)));
    pin = p; #1;
    checks++;
    if (pout !== exp) begin
      failures++;
      $display("FAIL shiftrow(%h) = %h expected %h", p, pout, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Cell labels 0..f in column-major order: rows 0..3 become
    // 0 4 8 c / 5 9 d 1 / a e 2 6 / f 3 7 b.
    pin = 64'h0123456789abcdef; #1;
    checks++;
    if (pout !== 64'h05af49e38d27c16b) begin
      failures++;
      $display("FAIL label pattern: %h", pout);
    end
    for (int i = 0; i < 300; i++) check({$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
