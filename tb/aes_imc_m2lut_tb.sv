// aes_imc_m2lut_tb: all 256 entries of the multiply-by-2 table against a
// bit-serial GF(2^8) product with the polynomial 0x11B.
module aes_imc_m2lut_tb;
  import aes_ref_pkg::*;
  logic [7:0] addr, data;
  int checks = 0, failures = 0;

  aes_imc_m2lut dut (.addr(addr), .data(data));

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      addr = 8'(i); #1;
      checks++;
      if (data !== r_mul(8'(i), 8'h02)) begin
        failures++;
        $display("FAIL m2[%h] = %h expected %h", i, data, r_mul(8'(i), 8'h02));
      end
    end
    addr = 8'h80; #1; checks++; if (data !== 8'h1B) failures++;
    addr = 8'h57; #1; checks++; if (data !== 8'hAE) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
