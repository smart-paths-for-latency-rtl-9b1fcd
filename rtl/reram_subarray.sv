// reram_subarray: behavioural model of one 128 x 128 ReRAM crossbar with its
// row of 1-bit DACs. Not synthesizable logic in the real chip: it stands for
// an analog macro.
//
// Each cell stores a 2-bit conductance level (0..3). In a read, the DACs put
// one input bit on each wordline; by Ohm's law each driven cell sources a
// current proportional to its level, and by Kirchhoff's law the bitline sums
// them. The model returns that sum as an exact integer per bitline, in units
// of one cell level (0 .. 3*ROWS). A read is a clock with read=1: the
// bitline values settle during it and are valid from the next clock on, until
// the next read; the sample & hold that follows captures them. Keeping the
// read clocked (rather than combinational) makes an idle crossbar cost
// nothing in simulation.
//
// Programming: one full row of cells per clock through prog_*; cells are
// written once, before inference (ReRAM is non-volatile). The row-write port
// is this design's choice; the array size and the 2-bit cells follow the
// architecture.
module reram_subarray #(
  parameter int ROWS      = 128,
  parameter int COLS      = 128,
  parameter int CELL_BITS = 2,
  parameter int BL_W      = 9
) (
  input  logic                          clk,
  input  logic                          prog_en,
  input  logic [$clog2(ROWS)-1:0]       prog_row,
  input  logic [COLS*CELL_BITS-1:0]     prog_data,   // cell c in bits [2c+1:2c]
  input  logic                          read,
  input  logic [ROWS-1:0]               wl,          // 1-bit DAC outputs
  output logic [COLS-1:0][BL_W-1:0]     bl           // bitline currents
);
  logic [COLS-1:0][CELL_BITS-1:0] cells [ROWS];

  always_ff @(posedge clk)
    if (prog_en) cells[prog_row] <= prog_data;

  always_ff @(posedge clk)
    if (read)
      for (int c = 0; c < COLS; c++) begin
        logic [BL_W-1:0] acc;
        acc = '0;
        for (int r = 0; r < ROWS; r++)
          if (wl[r]) acc = acc + BL_W'(cells[r][c]);
        bl[c] <= acc;
      end
endmodule
