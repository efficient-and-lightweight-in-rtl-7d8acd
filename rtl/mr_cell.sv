// mr_cell: digital emulator of one 4-bit multi-level memristor cross-point.
//
// The cell is a Moore state machine with 16 states, one per resistance level
// LVL_0 (lowest) .. LVL_15 (highest), and is built from the three parts of the
// classic Moore model: transition logic (the level a write programs, else
// hold), state memory (a register with synchronous reset to LVL_0), and output
// logic (the 4-bit value a read senses from the level). Reading is
// nondestructive and needs no enable.
//
// Interface: `we` with `data_in` programs the cell at the rising clock edge;
// `data_out` shows the stored nibble one cycle later and holds it until the
// next write. `rst` (active high, synchronous) returns the cell to LVL_0.
//
// From the paper: a 4-bit (16-state) Moore FSM used as the crossbar
// cross-point, with transition logic, state memory and output logic. The level
// encoding (level k stores value k) and the synchronous reset are choices of
// this design.
module mr_cell (
  input  logic       clk,
  input  logic       rst,
  input  logic       we,
  input  logic [3:0] data_in,
  output logic [3:0] data_out
);

  typedef enum logic [3:0] {
    LVL_0,  LVL_1,  LVL_2,  LVL_3,  LVL_4,  LVL_5,  LVL_6,  LVL_7,
    LVL_8,  LVL_9,  LVL_10, LVL_11, LVL_12, LVL_13, LVL_14, LVL_15
  } level_e;

  level_e level_q, level_d;

  // Transition logic: a write programs the level that encodes data_in.
  always_comb begin
    level_d = level_q;
    if (we) level_d = level_e'(data_in);
  end

  // State memory.
  always_ff @(posedge clk) begin
    if (rst) level_q <= LVL_0;
    else     level_q <= level_d;
  end

  // Output logic: sense the level as a 4-bit value.
  always_comb begin
    unique case (level_q)
      LVL_0:  data_out = 4'd0;   LVL_1:  data_out = 4'd1;
      LVL_2:  data_out = 4'd2;   LVL_3:  data_out = 4'd3;
      LVL_4:  data_out = 4'd4;   LVL_5:  data_out = 4'd5;
      LVL_6:  data_out = 4'd6;   LVL_7:  data_out = 4'd7;
      LVL_8:  data_out = 4'd8;   LVL_9:  data_out = 4'd9;
      LVL_10: data_out = 4'd10;  LVL_11: data_out = 4'd11;
      LVL_12: data_out = 4'd12;  LVL_13: data_out = 4'd13;
      LVL_14: data_out = 4'd14;  LVL_15: data_out = 4'd15;
      default: data_out = 4'd0;
    endcase
  end

endmodule
