// aes_imc_keygen_tb: expands keys through all ten rounds in plane form and
// compares every round key with the reference expansion, starting with the
// FIPS-197 key 2b7e1516... whose first and last round keys are known.
module aes_imc_keygen_tb;
  import aes_ref_pkg::*;
  logic [63:0] k1, k2, n1, n2;
  logic [7:0]  rc;
  int checks = 0, failures = 0;

  aes_imc_keygen dut (.key1(k1), .key2(k2), .rcon_in(rc), .next1(n1), .next2(n2));

  function automatic logic [7:0] rcon_of(int r);
    logic [7:0] c = 8'h01;
    for (int i = 1; i < r; i++) c = r_mul(c, 8'h02);
    return c;
  endfunction

  task automatic expand(logic [127:0] key, logic [127:0] last_exp);
    logic [127:0] k = key, exp;
    for (int r = 1; r <= 10; r++) begin
      exp = next_key(k, r);
      k1 = plane_hi(k); k2 = plane_lo(k); rc = rcon_of(r); #1;
      checks++;
      if (join_planes(n1, n2) !== exp) begin
        failures++;
        $display("FAIL round %0d key %h expected %h", r, join_planes(n1, n2), exp);
      end
      if (r == 1 && key == 128'h2b7e151628aed2a6abf7158809cf4f3c) begin
        checks++;
        if (join_planes(n1, n2) !== 128'ha0fafe1788542cb123a339392a6c7605) begin
          failures++;
          $display("FAIL FIPS round-1 key");
        end
      end
      k = join_planes(n1, n2);
    end
    if (last_exp != 0) begin
      checks++;
      if (k !== last_exp) begin
        failures++;
        $display("FAIL last round key %h expected %h", k, last_exp);
      end
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
    expand(128'h2b7e151628aed2a6abf7158809cf4f3c, 128'hd014f9a8c9ee2589e13f0cc8b6630ca6);
    expand(128'h000102030405060708090a0b0c0d0e0f, 128'h13111d7fe3944a17f307a78b4d2b30c5);
    for (int i = 0; i < 30; i++) expand(rand128(), 128'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
