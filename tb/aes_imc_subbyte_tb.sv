// aes_imc_subbyte_tb: random states through the two-plane Subbyte, compared
// with the reference SubBytes on the joined 128-bit state.
module aes_imc_subbyte_tb;
  import aes_ref_pkg::*;
  logic [63:0] i1, i2, o1, o2;
  int checks = 0, failures = 0;

  aes_imc_subbyte dut (.in_sub1(i1), .in_sub2(i2), .out_sub1(o1), .out_sub2(o2));

  task automatic check(logic [127:0] x);
    logic [127:0] exp;
    exp = sub_bytes(x);
    i1 = plane_hi(x); i2 = plane_lo(x); #1;
    checks++;
    if (join_planes(o1, o2) !== exp) begin
      failures++;
      $display("FAIL subbyte(%h) = %h expected %h", x, join_planes(o1, o2), exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_init();
    check(128'h00112233445566778899aabbccddeeff);
    check({16{8'h55}});
    for (int i = 0; i < 300; i++) check(rand128());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
