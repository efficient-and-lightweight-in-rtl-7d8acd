// mr_crossbar: 4x4 crossbar of 4-bit memristor cells holding one 64-bit
// nibble plane of the AES state or of a round key.
//
// Cross-point (row r, column c) is an mr_cell and stores nibble n = 4c + r of
// the plane, i.e. bits [63-4n -: 4] (FIPS-197 column-major state order).
// The word-line switch (`wl_we`, one bit per row) selects the rows a write
// programs; all columns of a selected row take their nibble from `wdata`, so a
// write with all four word lines active programs the whole array in one cycle.
// Reads are nondestructive: `rdata` shows the whole array at once (all sense
// amplifiers working in parallel), and the bit-line switch (`bl_sel`) selects
// one column whose four cells appear on `bl_data` (row 0 in the top nibble).
//
// Timing: writes take effect at the rising clock edge; both read ports are
// combinational from the cells. `rst` clears every cell synchronously.
//
// From the paper: the 4x4 array of 4-bit cells with WL and BL switches and
// 64 bits per array. The port set and the column read port width are this
// design's choices.
module mr_crossbar
  import aes_imc_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic [3:0]   wl_we,
  input  plane_t       wdata,
  output plane_t       rdata,
  input  logic [1:0]   bl_sel,
  output logic [15:0]  bl_data
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      localparam int unsigned N = 4*c + r;
      mr_cell u_cell (
        .clk      (clk),
        .rst      (rst),
        .we       (wl_we[r]),
        .data_in  (wdata[63-4*N -: 4]),
        .data_out (rdata[63-4*N -: 4])
      );
    end
  end

  // Bit-line switch: column c occupies 16 contiguous bits of the plane.
  always_comb begin
    unique case (bl_sel)
      2'd0: bl_data = rdata[63:48];
      2'd1: bl_data = rdata[47:32];
      2'd2: bl_data = rdata[31:16];
      2'd3: bl_data = rdata[15:0];
      default: bl_data = rdata[63:48];
    endcase
  end

endmodule
