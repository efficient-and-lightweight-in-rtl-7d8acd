// aes_imc_addroundkey_tb: checks the per-cross-point XOR of a state plane and
// a key plane, including the example of a plane whose key is all zeros and a
// plane whose key equals the state.
module aes_imc_addroundkey_tb;
  logic [63:0] state, key, result;
  int checks = 0, failures = 0;

  aes_imc_addroundkey dut (.state(state), .key(key), .result(result));

  task automatic check(logic [63:0] s, logic [63:0] k, logic [63:0] exp);
    state = s; key = k; #1;
    checks++;
    if (result !== exp) begin
      failures++;
      $display("FAIL %h ^ %h = %h expected %h", s, k, result, exp);
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
    logic [63:0] a, b, e;
    check(64'h0123456789abcdef, 64'h0, 64'h0123456789abcdef);
    check(64'h0123456789abcdef, 64'h0123456789abcdef, 64'h0);
    for (int i = 0; i < 500; i++) begin
      a = {$urandom, $urandom}; b = {$urandom, $urandom};
      for (int n = 0; n < 64; n++) e[n] = (a[n] != b[n]);
      check(a, b, e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
