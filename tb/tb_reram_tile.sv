// tb_reram_tile: self-checking testbench of reram_tile.
//
// Programs random 16-bit weights into a random subset of the tile's cells,
// loads signed activations and runs the tile three times:
//   1. inputs only in rows 0..63 of each group, so no column sum can exceed
//      the 8-bit ADC range; every output is compared with the exact product
//      sum(x * w) computed with plain integer arithmetic;
//   2. a dense all-ones input in group 0 (x = -1, 128 rows), which drives
//      column sums past 255; outputs are compared with a bit-level model that
//      clips each column sum at 255, and at least one saturation must be seen;
//   3. random dense inputs against the same clipping model.
// Each run must take exactly 2053 cycles from start to done.
module tb_reram_tile;
  import hetrax_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    w_en = 1'b0, in_en = 1'b0, start = 1'b0;
  logic [3:0]              w_group = '0;
  logic [6:0]              w_row = '0, w_col = '0, rd_col = '0;
  logic [DATA_W-1:0]       w_data = '0, in_data = '0;
  logic [10:0]             in_idx = '0;
  logic                    busy, done, sat_event;
  logic signed [ACC_W-1:0] rd_data;

  reram_tile dut (.*);

  int checks = 0, failures = 0;
  int sat_seen = 0;

  // reference copies
  int wref [GROUPS][XB_ROWS][XB_COLS];
  int xref [TILE_IN];

  always @(posedge clk) if (sat_event) sat_seen++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_w(int g, int r, int c, int v);
    @(negedge clk);
    w_en = 1'b1; w_group = 4'(g); w_row = 7'(r); w_col = 7'(c); w_data = 16'(v);
    @(negedge clk);
    w_en = 1'b0;
    wref[g][r][c] = v;
  endtask

  task automatic write_x(int i, int v);
    @(negedge clk);
    in_en = 1'b1; in_idx = 11'(i); in_data = 16'(v);
    @(negedge clk);
    in_en = 1'b0;
    xref[i] = v;
  endtask

  // exact product, no ADC effects
  function automatic longint exact(int c);
    longint s = 0;
    for (int g = 0; g < GROUPS; g++)
      for (int r = 0; r < XB_ROWS; r++)
        s += longint'(xref[g*XB_ROWS + r]) * longint'(wref[g][r][c]);
    return s;
  endfunction

  // bit-level model with 8-bit clipping of each column sum
  function automatic longint clipped(int c);
    longint s = 0, xs = 0;
    for (int i = 0; i < TILE_IN; i++) xs += longint'(xref[i]);
    for (int b = 0; b < DATA_W; b++) begin
      longint part = 0;
      for (int g = 0; g < GROUPS; g++)
        for (int sl = 0; sl < SLICES; sl++) begin
          int cs = 0;
          for (int r = 0; r < XB_ROWS; r++) begin
            int u = (wref[g][r][c] + 32768) & 16'hffff;
            if ((xref[g*XB_ROWS + r] >> b) & 1) cs += (u >> (2*sl)) & 3;
          end
          if (cs > 255) cs = 255;
          part += longint'(cs) << (2*sl);
        end
      if (b == DATA_W-1) s -= part << b; else s += part << b;
    end
    return s - (xs << 15);
  endfunction

  task automatic run_and_check(bit use_exact);
    int cyc = 0;
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != 2053) begin
      failures++;
      $display("run took %0d cycles, expected 2053", cyc);
    end
    for (int c = 0; c < XB_COLS; c++) begin
      longint e;
      rd_col = 7'(c);
      #1;
      e = use_exact ? exact(c) : clipped(c);
      checks++;
      if (rd_data !== ACC_W'(e)) begin
        failures++;
        if (failures < 10) $display("col %0d: got %0d expected %0d", c, rd_data, e);
      end
    end
  endtask

  initial begin
    for (int g = 0; g < GROUPS; g++)
      for (int r = 0; r < XB_ROWS; r++)
        for (int c = 0; c < XB_COLS; c++) wref[g][r][c] = 0;
    for (int i = 0; i < TILE_IN; i++) xref[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // random weights, including the extremes
    write_w(0, 0, 0, -32768);
    write_w(0, 1, 0, 32767);
    for (int k = 0; k < 1500; k++)
      write_w($urandom_range(GROUPS-1), $urandom_range(63), $urandom_range(XB_COLS-1),
              int'($signed(16'($urandom))));

    // 1: sparse rows, exact
    for (int g = 0; g < GROUPS; g++)
      for (int r = 0; r < 64; r++)
        if ($urandom_range(3) == 0)
          write_x(g*XB_ROWS + r, int'($signed(16'($urandom))));
    write_x(0, -32768);
    write_x(1, 32767);
    run_and_check(1'b1);

    // 2: dense negative inputs in group 0 force clipping
    for (int r = 0; r < XB_ROWS; r++) write_x(r, -1);
    sat_seen = 0;
    run_and_check(1'b0);
    checks++;
    if (sat_seen == 0) begin
      failures++;
      $display("no ADC saturation seen");
    end

    // 3: dense random inputs, clipping model
    for (int i = 0; i < TILE_IN; i++)
      if ($urandom_range(1) == 0) write_x(i, int'($signed(16'($urandom))));
    run_and_check(1'b0);

    $display("saturating conversions in last run: %0d", sat_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
