// aes_imc_sbox_tb: compares all 256 entries of the S-box table with a
// reference found by brute-force inversion, plus a few FIPS-197 values.
module aes_imc_sbox_tb;
  import aes_ref_pkg::*;
  logic [7:0] addr, data;
  int checks = 0, failures = 0;

  aes_imc_sbox dut (.addr(addr), .data(data));

  task automatic check(logic [7:0] a, logic [7:0] exp);
    addr = a; #1;
    checks++;
    if (data !== exp) begin
      failures++;
      $display("FAIL sbox[%h] = %h expected %h", a, data, exp);
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
    ref_init();
    check(8'h00, 8'h63);
    check(8'h53, 8'hED);
    check(8'h55, 8'hFC);   // nibble pair (5,5) -> (F,C)
    check(8'hFF, 8'h16);
    for (int i = 0; i < 256; i++) check(8'(i), sb[i]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
