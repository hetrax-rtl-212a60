// tb_reram_core: self-checking testbench of reram_core at full size.
//
// Programs random weights into random cells of all 16 tiles, writes a
// sparse activation vector (rows 0..63 of each 128-row group, so that no
// ADC clips) and checks:
//   1. a run without partial sums: all 2048 outputs against sum(x * w)
//      computed with plain integer arithmetic, and the run length;
//   2. a run with acc_prev: the testbench plays the previous core's output
//      buffer (one-cycle read latency) and every output must equal its
//      partial sum plus the product;
//   3. a forward: each of the 1536 forwarded words must equal the output
//      shifted right by fwd_shift and saturated to 16 bits, at its index.
module tb_reram_core;
  import hetrax_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    w_en = 1'b0, ib_we = 1'b0, start = 1'b0, acc_prev = 1'b0, start_fwd = 1'b0;
  logic [3:0]              w_tile = '0, w_group = '0;
  logic [6:0]              w_row = '0, w_col = '0;
  logic [DATA_W-1:0]       w_data = '0, ib_data = '0;
  logic [10:0]             ib_addr = '0, ob_rd_addr = '0;
  logic [5:0]              fwd_shift = '0;
  logic                    busy, done, fwd_we, sat_event;
  logic signed [ACC_W-1:0] ob_rd_data;
  logic [10:0]             psum_addr, fwd_addr;
  logic signed [ACC_W-1:0] psum_data = '0;
  logic [DATA_W-1:0]       fwd_data;

  reram_core dut (.*);

  int checks = 0, failures = 0;

  int     wref [TILES_PER_CORE][GROUPS][XB_ROWS][XB_COLS];
  int     xref [TILE_IN];
  longint yref [CORE_OUT];
  longint pref [CORE_OUT];

  // the previous core's output buffer
  always @(posedge clk) psum_data <= ACC_W'(pref[psum_addr]);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void compute_ref();
    for (int j = 0; j < CORE_OUT; j++) begin
      int t, c;
      longint s;
      t = j / XB_COLS; c = j % XB_COLS; s = 0;
      for (int g = 0; g < GROUPS; g++)
        for (int r = 0; r < 64; r++)
          s += longint'(xref[g*XB_ROWS + r]) * longint'(wref[t][g][r][c]);
      yref[j] = s;
    end
  endfunction

  task automatic do_run(bit acc, output int cyc);
    @(negedge clk);
    start = 1'b1; acc_prev = acc;
    @(negedge clk);
    start = 1'b0; acc_prev = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic check_outputs(bit acc);
    for (int j = 0; j < CORE_OUT; j++) begin
      longint e;
      @(negedge clk);
      ob_rd_addr = 11'(j);
      @(negedge clk);
      e = yref[j] + (acc ? pref[j] : 0);
      checks++;
      if (ob_rd_data !== ACC_W'(e)) begin
        failures++;
        if (failures < 10) $display("out %0d: got %0d expected %0d", j, ob_rd_data, e);
      end
    end
  endtask

  function automatic logic [15:0] sat16(longint v, int sh);
    longint s;
    s = v >>> sh;
    if (s > 32767) return 16'h7fff;
    if (s < -32768) return 16'h8000;
    return 16'(s);
  endfunction

  int fwd_seen = 0;
  int fwd_sh = 0;
  always @(posedge clk) if (fwd_we) begin
    checks++;
    fwd_seen++;
    if (fwd_data != sat16(yref[fwd_addr], fwd_sh)) begin
      failures++;
      if (failures < 10) $display("fwd %0d: got %h expected %h", fwd_addr, fwd_data, sat16(yref[fwd_addr], fwd_sh));
    end
  end

  initial begin
    int cyc;
    for (int t = 0; t < TILES_PER_CORE; t++)
      for (int g = 0; g < GROUPS; g++)
        for (int r = 0; r < XB_ROWS; r++)
          for (int c = 0; c < XB_COLS; c++) wref[t][g][r][c] = 0;
    for (int j = 0; j < CORE_OUT; j++) pref[j] = longint'($signed({$urandom, $urandom})) >>> 20;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    for (int k = 0; k < 3000; k++) begin
      int t, g, r, c, v;
      t = $urandom_range(15); g = $urandom_range(11); r = $urandom_range(63);
      c = $urandom_range(127); v = int'($signed(16'($urandom)));
      @(negedge clk);
      w_en = 1'b1; w_tile = 4'(t); w_group = 4'(g); w_row = 7'(r); w_col = 7'(c); w_data = 16'(v);
      wref[t][g][r][c] = v;
    end
    @(negedge clk);
    w_en = 1'b0;

    for (int i = 0; i < TILE_IN; i++) begin
      int v;
      v = ((i % XB_ROWS) < 64) ? int'($signed(16'($urandom))) : 0;
      @(negedge clk);
      ib_we = 1'b1; ib_addr = 11'(i); ib_data = 16'(v);
      xref[i] = v;
    end
    @(negedge clk);
    ib_we = 1'b0;
    compute_ref();

    // 1: plain run
    do_run(1'b0, cyc);
    checks++;
    if (cyc != 5641) begin failures++; $display("run took %0d cycles, expected 5641", cyc); end
    check_outputs(1'b0);

    // 2: run adding the previous core's partial sums
    do_run(1'b1, cyc);
    check_outputs(1'b1);

    // 3: forward with a shift; the check runs in the always block above
    do_run(1'b0, cyc);
    fwd_sh = 18;
    @(negedge clk);
    start_fwd = 1'b1; fwd_shift = 6'(fwd_sh);
    @(negedge clk);
    start_fwd = 1'b0;
    while (!done) @(negedge clk);
    checks++;
    if (fwd_seen != TILE_IN) begin failures++; $display("forwarded %0d words", fwd_seen); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
