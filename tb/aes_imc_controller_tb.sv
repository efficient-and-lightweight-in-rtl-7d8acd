// aes_imc_controller_tb: drives the sequencer with a model of the round
// hardware that answers each op_start with op_done after DELAY cycles.
// Checks the order LOAD, K00, K01..K10, OUT, READY, one done per step,
// ready after 26 edges with the one-cycle answer (longer with a slow answer:
// a state holds while done is low), start ignored while busy, and a new
// block started directly from READY.
module aes_imc_controller_tb;
  import aes_imc_pkg::*;
  logic clk = 0, rst, start, op_done;
  ctrl_state_e state;
  logic [3:0] round;
  logic load, op_start, ready;
  int checks = 0, failures = 0;
  int delay = 1;
  int wait_cnt = 0;

  aes_imc_controller dut (.clk(clk), .rst(rst), .start(start), .op_done(op_done),
                          .state(state), .round(round), .load(load),
                          .op_start(op_start), .ready(ready));

  always #5 clk = ~clk;

  // Round hardware model: done pulses `delay` cycles after start rises.
  always_ff @(posedge clk) begin
    if (rst || !op_start || op_done) begin
      op_done  <= 1'b0;
      wait_cnt <= 0;
    end else if (wait_cnt + 1 >= delay) begin
      op_done  <= 1'b1;
    end else begin
      wait_cnt <= wait_cnt + 1;
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s (state %s round %0d)", what, state.name(), round);
    end
  endtask

  // Runs one block; returns the edges from start sampling to ready.
  task automatic run_block(int exp_cycles, bit poke_start);
    int cyc = 0;
    int last_round = -1;
    int loads = 0, k00 = 0, outs = 0;
    start = 1;
    @(posedge clk); #1; cyc++;
    start = 0;
    while (!ready && cyc < 500) begin
      if (load) loads++;
      if (state == ST_K00 && op_done) k00++;
      if (state == ST_OUT && op_done) outs++;
      if (state == ST_ROUND && op_done) begin
        check(int'(round) == last_round + 1 || (last_round == -1 && round == 1),
              "rounds in order");
        last_round = int'(round);
      end
      if (poke_start && cyc == 7) start = 1;   // must be ignored
      @(posedge clk); #1; cyc++;
      start = 0;
    end
    check(loads == 1, "one LOAD");
    check(k00 == 1, "one K00 step");
    check(last_round == 10, "ten rounds");
    check(outs == 1, "one OUT step");
    check(ready, "ready reached");
    check(cyc == exp_cycles, $sformatf("latency %0d expected %0d", cyc, exp_cycles));
    repeat (3) @(posedge clk); #1;
    check(ready && state == ST_READY, "ready holds");
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; start = 0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    check(state == ST_IDLE && !ready && !op_start, "idle after reset");
    run_block(26, 0);
    run_block(26, 1);                 // from READY, with a start while busy
    delay = 3;                        // slower round hardware: 2 extra per step
    run_block(26 + 12*2, 0);
    rst = 1; @(posedge clk); #1; rst = 0;
    check(state == ST_IDLE, "reset returns to idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
