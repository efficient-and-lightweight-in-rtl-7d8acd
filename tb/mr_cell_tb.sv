// mr_cell_tb: self-checking test of the 4-bit memristor emulator cell.
// Checks reset to level 0, that a write programs each of the 16 levels and
// reads back one cycle later, and that the value holds while `we` is low.
module mr_cell_tb;
  logic clk = 0, rst, we;
  logic [3:0] din, dout;
  int checks = 0, failures = 0;

  mr_cell dut (.clk(clk), .rst(rst), .we(we), .data_in(din), .data_out(dout));

  always #5 clk = ~clk;

  task automatic check(logic [3:0] exp, string what);
    checks++;
    if (dout !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, dout, exp);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] model;
    rst = 1; we = 0; din = 0;
    @(posedge clk); #1;
    check(4'd0, "reset");
    rst = 0;
    // every level, written then held
    for (int v = 0; v < 16; v++) begin
      we = 1; din = 4'(v);
      @(posedge clk); #1;
      check(4'(v), "write");
      we = 0; din = ~4'(v);
      repeat (2) @(posedge clk); #1;
      check(4'(v), "hold");
    end
    // random writes and holds
    model = dout;
    for (int i = 0; i < 200; i++) begin
      we = 1'($urandom); din = 4'($urandom);
      @(posedge clk); #1;
      if (we) model = din;
      check(model, "random");
    end
    rst = 1; @(posedge clk); #1; check(4'd0, "reset again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
