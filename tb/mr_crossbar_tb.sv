// mr_crossbar_tb: self-checking test of the 4x4 crossbar of 4-bit cells.
// Writes whole arrays and single word lines, compares the parallel read-out
// and every bit-line column against a model of the array kept as 16 nibbles
// at (row, column), with nibble n = 4*column + row of the plane.
module mr_crossbar_tb;
  logic clk = 0, rst;
  logic [3:0]  wl_we;
  logic [63:0] wdata, rdata;
  logic [1:0]  bl_sel;
  logic [15:0] bl_data;
  logic [3:0]  model [4][4];   // [row][col]
  int checks = 0, failures = 0;

  mr_crossbar dut (.clk(clk), .rst(rst), .wl_we(wl_we), .wdata(wdata), .rdata(rdata),
                   .bl_sel(bl_sel), .bl_data(bl_data));

  always #5 clk = ~clk;

  function automatic logic [63:0] model_plane();
    logic [63:0] p;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) p[63-4*(4*c+r) -: 4] = model[r][c];
    return p;
  endfunction

  task automatic check_all(string what);
    checks++;
    if (rdata !== model_plane()) begin
      failures++;
      $display("FAIL %s: rdata %h expected %h", what, rdata, model_plane());
    end
    for (int c = 0; c < 4; c++) begin
      bl_sel = 2'(c); #1;
      checks++;
      if (bl_data !== {model[0][c], model[1][c], model[2][c], model[3][c]}) begin
        failures++;
        $display("FAIL %s: column %0d got %h", what, c, bl_data);
      end
    end
  endtask

  task automatic do_write(logic [3:0] rows, logic [63:0] d);
    wl_we = rows; wdata = d;
    @(posedge clk); #1;
    wl_we = 0;
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++)
        if (rows[r]) model[r][c] = d[63-4*(4*c+r) -: 4];
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wl_we = 0; wdata = 0; bl_sel = 0;
    @(posedge clk); #1;
    rst = 0;
    foreach (model[r, c]) model[r][c] = 0;
    check_all("reset");
    do_write(4'hF, 64'h0123456789abcdef);
    check_all("full write");
    // row 1 only: word line switch
    do_write(4'b0010, 64'hfedcba9876543210);
    check_all("row 1 write");
    for (int i = 0; i < 100; i++) begin
      do_write(4'($urandom), {$urandom, $urandom});
      check_all("random write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
