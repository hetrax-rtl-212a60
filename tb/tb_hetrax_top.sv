// tb_hetrax_top: end-to-end testbench of the ReRAM tier, reduced to 3 cores
// of 2 tiles each (tiles keep their full 96 crossbars of 128x128 cells); the
// 16 x 16-tile default is too large to build for simulation in useful time.
//
// Two command sources play the two vertical links: link 0 the SM-MC tier,
// link 1 the DRAM side. They run one FF pass through three chained cores:
//   1. link 1 programs weights of core 0 while link 0 writes core 0's
//      activations (sparse rows, so the product is exact);
//   2. link 0 starts core 0; meanwhile link 1 programs cores 1 and 2 and
//      writes core 2's inputs (weight updates hidden behind computation),
//      with all 128 rows of one group at -1 so that ADCs clip; then link 0
//      asks for a result of core 0, which waits for the run (a decoder stall
//      that backs up the links);
//   3. core 0 forwards its results, shifted and saturated to 16 bits, into
//      core 1 (one-way flow to the next layer); core 1 runs on them; core 2
//      runs adding core 1's results (partial-sum chain);
//   4. both links read results of all three cores back.
// Results are compared with an independent model: plain integer products
// for core 0 (sparse inputs), and a bit-level model that clips every
// crossbar column sum at 255 for cores 1 and 2. Each mechanism (arbitration between
// links, back-pressure, weight writes during a run, forward, partial-sum
// chain, ADC clipping, responses on both links) is counted and must occur.
module tb_hetrax_top;
  import hetrax_pkg::*;

  localparam int NV = 2;
  localparam int NC = 3;        // cores simulated
  localparam int NT = 2;        // tiles per core simulated
  localparam int NW = 400;      // weights programmed per core
  localparam int NR = 96;       // outputs read back per core
  localparam int SH = 12;       // forward shift

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NV-1:0]            vl_in_valid = '0;
  logic [NV-1:0]            vl_in_ready;
  cmd_t [NV-1:0]            vl_in_cmd;
  logic [NV-1:0]            vl_out_valid;
  logic [NV-1:0]            vl_out_ready = '1;
  logic [NV-1:0][ACC_W-1:0] vl_out_data;
  logic [NC-1:0]            core_busy;
  logic                     sat_event;

  hetrax_top #(.N_CORES(NC), .N_TILES(NT)) dut (.*);

  int checks = 0, failures = 0;

  // ---------------- reference model ----------------
  typedef struct { int t, g, r, c, v; } wentry_t;
  wentry_t wl [3][$];                 // programmed weights per core
  int      x0 [TILE_IN], x1 [TILE_IN], x2 [TILE_IN];
  longint  y0 [CORE_OUT];


  // exact x * W for outputs of a core, using the weight list
  int w [TILE_IN][XB_COLS];   // one tile's weights, dense
  function automatic void exact_all(int core, const ref int x [TILE_IN], ref longint y [CORE_OUT]);
    for (int t = 0; t < NT; t++) begin
      for (int i = 0; i < TILE_IN; i++) for (int c = 0; c < XB_COLS; c++) w[i][c] = 0;
      foreach (wl[core][k]) if (wl[core][k].t == t)
        w[wl[core][k].g*XB_ROWS + wl[core][k].r][wl[core][k].c] = wl[core][k].v;
      for (int c = 0; c < XB_COLS; c++) begin
        longint s;
        s = 0;
        for (int i = 0; i < TILE_IN; i++) s += longint'(x[i]) * longint'(w[i][c]);
        y[t*XB_COLS + c] = s;
      end
    end
  endfunction

  // bit-level model of one output with 8-bit clipping of column sums
  function automatic longint clipped(int core, const ref int x [TILE_IN], int j);
    int t, c;
    int u [TILE_IN];
    longint s, xs;
    t = j / XB_COLS; c = j % XB_COLS; s = 0; xs = 0;
    for (int i = 0; i < TILE_IN; i++) begin
      u[i] = 32768;
      xs += longint'(x[i]);
    end
    foreach (wl[core][k]) if (wl[core][k].t == t && wl[core][k].c == c)
      u[wl[core][k].g*XB_ROWS + wl[core][k].r] = (wl[core][k].v + 32768) & 16'hffff;
    for (int b = 0; b < DATA_W; b++) begin
      longint part;
      part = 0;
      for (int g = 0; g < GROUPS; g++)
        for (int sl = 0; sl < SLICES; sl++) begin
          int cs;
          cs = 0;
          for (int r = 0; r < XB_ROWS; r++)
            if ((x[g*XB_ROWS + r] >> b) & 1) cs += (u[g*XB_ROWS + r] >> (2*sl)) & 3;
          if (cs > 255) cs = 255;
          part += longint'(cs) << (2*sl);
        end
      if (b == DATA_W-1) s -= part << b; else s += part << b;
    end
    return s - (xs << 15);
  endfunction

  function automatic int sat16(longint v);
    longint s;
    s = v >>> SH;
    if (s > 32767) return 32767;
    if (s < -32768) return -32768;
    return int'(s);
  endfunction

  // ---------------- link drivers ----------------
  task automatic send(int v, cmd_t c);
    @(negedge clk);
    vl_in_valid[v] = 1'b1;
    vl_in_cmd[v]   = c;
    @(posedge clk);
    while (!vl_in_ready[v]) @(posedge clk);
    #1 vl_in_valid[v] = 1'b0;
  endtask

  function automatic cmd_t mk(cmd_op_e op, int core);
    cmd_t c;
    c = '0;
    c.op = op;
    c.core = 4'(core);
    return c;
  endfunction

  task automatic program_weights(int v, int core);
    for (int k = 0; k < NW; k++) begin
      cmd_t c;
      wentry_t e;
      e.t = $urandom_range(1); e.g = $urandom_range(11); e.r = $urandom_range(63);
      e.c = $urandom_range(127); e.v = int'($signed(16'($urandom)));
      c = mk(CMD_WEIGHT, core);
      c.tile = 4'(e.t); c.group = 4'(e.g); c.row = 7'(e.r); c.index = 11'(e.c); c.data = 16'(e.v);
      send(v, c);
      wl[core].push_back(e);
    end
  endtask

  task automatic write_inputs(int v, int core, ref int x [TILE_IN]);
    for (int i = 0; i < TILE_IN; i++) begin
      cmd_t c;
      x[i] = ((i % XB_ROWS) < 64 && $urandom_range(1) == 0) ? int'($signed(16'($urandom))) : 0;
      c = mk(CMD_INPUT, core);
      c.index = 11'(i); c.data = 16'(x[i]);
      send(v, c);
    end
  endtask

  // ---------------- responses ----------------
  typedef struct { int core, idx; } rd_t;
  rd_t    pend [NV][$];
  longint got  [3][CORE_OUT];
  bit     have [3][CORE_OUT];
  int     rsp_cnt [NV];

  task automatic read(int v, int core, int idx);
    cmd_t c;
    rd_t  r;
    c = mk(CMD_READ, core);
    c.index = 11'(idx);
    r.core = core; r.idx = idx;
    pend[v].push_back(r);
    send(v, c);
  endtask

  always @(posedge clk) for (int v = 0; v < NV; v++)
    if (vl_out_valid[v] && vl_out_ready[v]) begin
      rd_t r;
      rsp_cnt[v]++;
      if (pend[v].size() == 0) begin
        failures++;
        $display("unexpected response on link %0d", v);
      end else begin
        r = pend[v].pop_front();
        got[r.core][r.idx]  = longint'($signed(vl_out_data[v]));
        have[r.core][r.idx] = 1'b1;
      end
    end

  // ---------------- mechanism counters ----------------
  int n_conflict = 0, n_backpressure = 0, n_overlap = 0, n_fwd = 0, n_sat = 0, n_chain = 0;
  always @(posedge clk) if (rst_n) begin
    if (&vl_in_valid) n_conflict++;
    for (int v = 0; v < NV; v++) if (vl_in_valid[v] && !vl_in_ready[v]) n_backpressure++;
    if (vl_in_valid[1] && vl_in_ready[1] && vl_in_cmd[1].op == CMD_WEIGHT && core_busy[0]) n_overlap++;
    if (sat_event) n_sat++;
  end

  always @(posedge clk) begin
    if (dut.c_fwd_we[0]) n_fwd++;
    if (core_busy[2] && dut.c_acc[2]) n_chain++;
  end

  // wait until every queued command has issued and every core is idle
  bit loaded = 1'b0;
  task automatic drain();
    repeat (4) @(negedge clk);
    while (core_busy != '0 || dut.dec_valid) @(negedge clk);
  endtask

  task automatic expect_count(string name, int n);
    checks++;
    if (n == 0) begin failures++; $display("mechanism never happened: %s", name); end
    else $display("%s: %0d", name, n);
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int idx [NR];
    int cyc;
    cmd_t c;
    vl_in_cmd = '0;
    rsp_cnt[0] = 0; rsp_cnt[1] = 0;
    for (int k = 0; k < 3; k++) for (int j = 0; j < CORE_OUT; j++) have[k][j] = 1'b0;
    for (int i = 0; i < TILE_IN; i++) x2[i] = 0;
    for (int n = 0; n < NR; n++) idx[n] = (n < 8) ? n : $urandom_range(NT*XB_COLS-1);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // 1: program and load core 0 from both links at once
    fork
      program_weights(1, 0);
      write_inputs(0, 0, x0);
    join

    // 2: run core 0; program cores 1 and 2 behind it
    fork
      begin
        send(0, mk(CMD_RUN, 0));
        wait (loaded);
        read(0, 0, 0);            // waits for the run to end
      end
      begin
        program_weights(1, 1);
        program_weights(1, 2);
        write_inputs(1, 2, x2);
        // group 0 of core 2 all -1: dense bit planes that overflow the ADC
        for (int i = 0; i < XB_ROWS; i++) begin
          cmd_t ci;
          x2[i] = -1;
          ci = mk(CMD_INPUT, 2);
          ci.index = 11'(i); ci.data = 16'hffff;
          send(1, ci);
        end
        loaded = 1'b1;
      end
    join
    drain();

    // 3: forward core 0 -> core 1, run core 1, run core 2 on top of core 1
    c = mk(CMD_FWD, 0);
    c.shift = 6'(SH);
    send(0, c);
    send(0, mk(CMD_RUN, 1));       // waits in the decoder for the forward
    c = mk(CMD_RUN, 2);
    c.acc_prev = 1'b1;
    send(0, c);                    // waits until core 1 is done
    drain();

    // 4: read back over both links
    fork
      for (int n = 0; n < NR; n++) read(0, 0, idx[n]);
      for (int n = 0; n < NR; n++) begin read(1, 1, idx[n]); read(1, 2, idx[n]); end
    join
    repeat (20) @(negedge clk);

    // ---- reference and comparison ----
    exact_all(0, x0, y0);
    for (int i = 0; i < TILE_IN; i++) x1[i] = sat16(y0[i]);
    for (int n = 0; n < NR; n++) begin
      longint e0, e1, e2;
      int j;
      j = idx[n];
      e0 = y0[j];
      e1 = clipped(1, x1, j);
      // core 2: dense group 0 clips, so the clipping model applies
      e2 = e1 + clipped(2, x2, j);
      checks += 3;
      if (!have[0][j] || got[0][j] != e0) begin failures++; if (failures < 40) $display("core0[%0d] got %0d exp %0d", j, got[0][j], e0); end
      if (!have[1][j] || got[1][j] != e1) begin failures++; if (failures < 40) $display("core1[%0d] got %0d exp %0d", j, got[1][j], e1); end
      if (!have[2][j] || got[2][j] != e2) begin failures++; if (failures < 40) $display("core2[%0d] got %0d exp %0d", j, got[2][j], e2); end
    end

    expect_count("cycles with both links offering a command", n_conflict);
    expect_count("cycles of back-pressure on a link", n_backpressure);
    expect_count("weights accepted while core 0 computed", n_overlap);
    expect_count("words forwarded core 0 -> core 1", n_fwd);
    expect_count("cycles of partial-sum chaining core 1 -> core 2", n_chain);
    expect_count("ADC conversions that clipped", n_sat);
    expect_count("responses on link 0", rsp_cnt[0]);
    expect_count("responses on link 1", rsp_cnt[1]);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
