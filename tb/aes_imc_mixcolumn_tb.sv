// aes_imc_mixcolumn_tb: the M-2/Tj form of Mixcolumn on two planes against
// the reference 2-3-1-1 matrix product, plus the known column
// db 13 53 45 -> 8e 4d a1 bc and the column 00 44 88 cc whose first output
// byte is 88.
module aes_imc_mixcolumn_tb;
  import aes_ref_pkg::*;
  logic [63:0] i1, i2, o1, o2;
  int checks = 0, failures = 0;

  aes_imc_mixcolumn dut (.in_mix1(i1), .in_mix2(i2), .out_mix1(o1), .out_mix2(o2));

  task automatic check(logic [127:0] x, logic [127:0] exp);
    i1 = plane_hi(x); i2 = plane_lo(x); #1;
    checks++;
    if (join_planes(o1, o2) !== exp) begin
      failures++;
      $display("FAIL mix(%h) = %h expected %h", x, join_planes(o1, o2), exp);
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
    logic [127:0] x;
    check(128'hdb135345_f20a225c_01010101_c6c6c6c6, 128'h8e4da1bc_9fdc589d_01010101_c6c6c6c6);
    // Column 00 44 88 cc: first output byte 2*00 ^ 3*44 ^ 88 ^ cc = 88.
    x = {32'h004488cc, 96'h0};
    i1 = plane_hi(x); i2 = plane_lo(x); #1;
    checks++;
    if (join_planes(o1, o2)[127:120] !== 8'h88) begin
      failures++;
      $display("FAIL column 004488cc byte 0 = %h", join_planes(o1, o2)[127:120]);
    end
    for (int i = 0; i < 300; i++) begin
      x = rand128();
      check(x, mix_columns(x));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
