// reram_crossbar: behavioural model of one 128x128 ReRAM crossbar with its
// 1-bit row DACs and column multiplexer. Not synthesizable logic in the real
// part: the cells are resistive devices and the column sum is an analog
// current. This model gives that current as an integer.
//
// Function. Each cell stores a 2-bit conductance level (0..3). Rows are
// driven by 1-bit DACs from row_in. A read of column c returns
//     col_sum = sum over r of row_in[r] * cell[r][c]        (0 .. 384)
// which is what the column current would be in units of one cell step.
//
// Interface and timing. A read (rd_en) samples row_in and rd_col at the
// clock edge and presents col_sum one cycle later. A write (wr_en) programs
// one cell at wr_row/wr_col in one cycle; ReRAM write latency is not modelled.
// Reads and writes in the same cycle are not allowed (the tile never does it).
// Every cell starts at INIT_CELL, so a crossbar that was never programmed
// holds a defined weight.
//
// From the specification: 128x128 cells, 2 bits per cell, 1-bit DACs.
// This design's own choice: one column read per cycle (the ADC is shared by
// the 128 columns), and the integer model of the analog sum (no noise).
module reram_crossbar
  import hetrax_pkg::*;
#(
  parameter int unsigned ROWS      = XB_ROWS,
  parameter int unsigned COLS      = XB_COLS,
  parameter int unsigned CB        = CELL_BITS,
  parameter logic [CELL_BITS-1:0] INIT_CELL = '0,
  localparam int unsigned SUM_W    = $clog2(ROWS * ((1 << CB) - 1) + 1)
) (
  input  logic                     clk,
  // cell programming
  input  logic                     wr_en,
  input  logic [$clog2(ROWS)-1:0]  wr_row,
  input  logic [$clog2(COLS)-1:0]  wr_col,
  input  logic [CB-1:0]            wr_cell,
  // bit-serial read of one column
  input  logic                     rd_en,
  input  logic [ROWS-1:0]          row_in,
  input  logic [$clog2(COLS)-1:0]  rd_col,
  output logic [SUM_W-1:0]         col_sum
);

  // one packed word of COLS cells per row
  logic [COLS*CB-1:0] cells [ROWS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        cells[r][c*CB +: CB] = INIT_CELL;
  end

  always_ff @(posedge clk) begin
    if (wr_en) begin
      cells[wr_row][wr_col*CB +: CB] <= wr_cell;
    end
    if (rd_en) begin
      logic [SUM_W-1:0] acc;
      acc = '0;
      for (int r = 0; r < ROWS; r++)
        if (row_in[r]) acc = acc + SUM_W'(cells[r][rd_col*CB +: CB]);
      col_sum <= acc;
    end
  end

`ifndef SYNTHESIS
  // the tile must not program and read the same crossbar in one cycle
  assert property (@(posedge clk) !(wr_en && rd_en))
    else $error("reram_crossbar: read and write in the same cycle");
`endif

endmodule
