// tb_reram_crossbar: self-checking testbench of the crossbar model.
//
// Checks the initial cell level, programs random 2-bit levels into random
// cells, and reads every column under random 1-bit row patterns; each column
// sum is compared with a sum formed from a reference copy of the cells. The
// sum must appear one cycle after the read. The all-ones pattern over cells
// of level 3 checks the full 0..384 range.
module tb_reram_crossbar;
  import hetrax_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                wr_en = 1'b0, rd_en = 1'b0;
  logic [6:0]          wr_row = '0, wr_col = '0, rd_col = '0;
  logic [1:0]          wr_cell = '0;
  logic [XB_ROWS-1:0]  row_in = '0;
  logic [COLSUM_W-1:0] col_sum;

  reram_crossbar #(.INIT_CELL(2'd1)) dut (.*);

  int checks = 0, failures = 0;
  int ref_cell [XB_ROWS][XB_COLS];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(int c);
    int e = 0;
    @(negedge clk);
    rd_en = 1'b1; rd_col = 7'(c);
    for (int r = 0; r < XB_ROWS; r++) if (row_in[r]) e += ref_cell[r][c];
    @(negedge clk);
    rd_en = 1'b0;
    checks++;
    if (int'(col_sum) != e) begin
      failures++;
      if (failures < 10) $display("col %0d: got %0d expected %0d", c, col_sum, e);
    end
  endtask

  initial begin
    for (int r = 0; r < XB_ROWS; r++)
      for (int c = 0; c < XB_COLS; c++) ref_cell[r][c] = 1;
    // unprogrammed crossbar: every cell at INIT_CELL
    row_in = '1;
    read_check(5);
    // program cells
    for (int k = 0; k < 4000; k++) begin
      int r, c, v;
      r = $urandom_range(XB_ROWS-1); c = $urandom_range(XB_COLS-1); v = $urandom_range(3);
      @(negedge clk);
      wr_en = 1'b1; wr_row = 7'(r); wr_col = 7'(c); wr_cell = 2'(v);
      ref_cell[r][c] = v;
    end
    @(negedge clk);
    wr_en = 1'b0;
    for (int p = 0; p < 4; p++) begin
      row_in = {$urandom, $urandom, $urandom, $urandom};
      for (int c = 0; c < XB_COLS; c++) read_check(c);
    end
    // full-range column: all cells at level 3
    for (int r = 0; r < XB_ROWS; r++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_row = 7'(r); wr_col = 7'd9; wr_cell = 2'd3;
      ref_cell[r][9] = 3;
    end
    @(negedge clk);
    wr_en = 1'b0;
    row_in = '1;
    read_check(9);
    checks++;
    if (col_sum != 9'd384) begin failures++; $display("full range sum %0d", col_sum); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
