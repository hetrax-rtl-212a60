// hetrax_top: the ReRAM tier of HeTraX, the feed-forward (FF) engine of a
// 3D heterogeneous transformer accelerator.
//
// In HeTraX the multi-head attention runs on GPU-style streaming
// multiprocessors (SMs) and memory controllers (MCs) on their own tiers,
// while the FF layers, whose weights are fixed during inference, run in a
// tier of ReRAM cores. Tiers are stacked and joined by TSV vertical links.
// This module is that ReRAM tier: 16 ReRAM cores (a 4x4 grid) and the
// vertical-link interface through which the SM-MC tier and the DRAM side
// (through an MC) program weights, deliver activations, start work and read
// results. The SMs, MCs, DRAM and the TSVs themselves lie outside it; their
// signals are this module's ports.
//
// Structure.
//   vertical links (NUM_VL) -> cmd router (NUM_VL x 1) -> command decoder
//   command decoder         -> 16 x reram_core, chained core i -> core i+1
//   read responses          -> rsp router (1 x NUM_VL) -> vertical links
// Each vertical-link flit is one command (hetrax_pkg::cmd_t). Read responses
// go back to the link the read came from.
//
// Concurrency. The decoder issues a command as soon as the cores it touches
// are idle, so weights and inputs can be written into some cores while
// others compute. This is how the tier hides the slow ReRAM writes of the
// next layer's weights behind ongoing computation. A command whose core is
// busy waits at the head of the queue (in-order issue).
//
// Issue rules (per core c):
//   CMD_WEIGHT, CMD_INPUT  core c idle, and core c-1 not forwarding into c
//   CMD_RUN                core c idle, core c+1 not reading c's results,
//                          core c-1 not forwarding into c; with acc_prev
//                          also core c-1 idle (acc_prev ignored for c=0)
//   CMD_FWD                core c and c+1 idle (ignored for c=15)
//   CMD_READ               core c idle; result offered three cycles later
//
// Parameters: NUM_VL vertical links (2), N_CORES cores (16) and N_TILES
// tiles per core (16); smaller values only serve short simulations.
//
// From the specification: 16 ReRAM cores in a 4x4 grid, FF weights spatially
// partitioned over the cores with one-way flow of activations from layer to
// layer, weight updates overlapped with computation, and FIFO-flow-controlled
// routers on the links. This design's own choices: the command set and its
// encoding, in-order issue, the core chain as the one-way path, the number
// of vertical links (2: SM-MC tier and DRAM side) and router depths.
module hetrax_top
  import hetrax_pkg::*;
#(
  parameter int unsigned NUM_VL  = 2,
  parameter int unsigned N_CORES = CORES,
  parameter int unsigned N_TILES = TILES_PER_CORE
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // commands arriving over the vertical links
  input  logic [NUM_VL-1:0]                 vl_in_valid,
  output logic [NUM_VL-1:0]                 vl_in_ready,
  input  cmd_t [NUM_VL-1:0]                 vl_in_cmd,
  // read responses leaving over the vertical links
  output logic [NUM_VL-1:0]                 vl_out_valid,
  input  logic [NUM_VL-1:0]                 vl_out_ready,
  output logic [NUM_VL-1:0][ACC_W-1:0]      vl_out_data,
  // status
  output logic [N_CORES-1:0]                core_busy,
  output logic                              sat_event
);

  localparam int unsigned SRC_W = (NUM_VL > 1) ? $clog2(NUM_VL) : 1;
  localparam int unsigned CMD_W = $bits(cmd_t);
  localparam int unsigned CF_W  = SRC_W + CMD_W + 1;      // {src, cmd, dest}
  localparam int unsigned RF_W  = ACC_W + SRC_W;          // {data, dest}

  // ---------------- command router: many vertical links to one decoder ----
  logic [NUM_VL-1:0][CF_W-1:0] cf_in;
  logic             dec_valid, dec_ready;
  logic [CF_W-1:0]  dec_flit;

  for (genvar v = 0; v < NUM_VL; v++) begin : g_cf
    assign cf_in[v] = {SRC_W'(v), vl_in_cmd[v], 1'b0};
  end

  noc_router #(.N_IN(NUM_VL), .N_OUT(1), .FLIT_W(CF_W), .DEPTH(4)) u_cmd_router (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (vl_in_valid),
    .in_ready (vl_in_ready),
    .in_flit  (cf_in),
    .out_valid(dec_valid),
    .out_ready(dec_ready),
    .out_flit (dec_flit)
  );

  cmd_t             cmd;
  logic [SRC_W-1:0] cmd_src;
  assign cmd     = cmd_t'(dec_flit[CMD_W:1]);
  assign cmd_src = dec_flit[CF_W-1 -: SRC_W];

  // ---------------- cores ----------------
  logic [N_CORES-1:0]               c_w_en, c_ib_we, c_start, c_fwd, c_busy, c_done, c_sat;
  logic [N_CORES-1:0]               c_fwd_we;
  logic [N_CORES-1:0][10:0]         c_fwd_addr, c_psum_addr, c_ob_ra;
  logic [N_CORES-1:0][DATA_W-1:0]   c_fwd_data;
  logic signed [ACC_W-1:0]        c_ob_rd [N_CORES];
  logic [N_CORES-1:0]               c_acc;       // run with acc_prev in progress
  logic [N_CORES-1:0]               psum_rd;     // core c's results read by c+1
  logic [N_CORES-1:0]               fwd_q;       // core c is forwarding into c+1

  // read path
  logic              rd_req;
  logic [1:0]        rd_st;        // 0 idle, 1 address at buffer, 2 data ready
  logic [3:0]        rd_core;
  logic [10:0]       rd_addr;
  logic [SRC_W-1:0]  rd_src;
  logic              rsp_v;
  logic [RF_W-1:0]   rsp_flit;
  logic              rsp_ready;

  for (genvar c = 0; c < N_CORES; c++) begin : g_core
    logic              ib_we_m;
    logic [10:0]       ib_addr_m;
    logic [DATA_W-1:0] ib_data_m;
    logic signed [ACC_W-1:0] psum_in;

    // the previous core's forward has the input buffer while it runs
    if (c > 0) begin : g_link
      assign ib_we_m   = c_fwd_we[c-1] | c_ib_we[c];
      assign ib_addr_m = c_fwd_we[c-1] ? c_fwd_addr[c-1] : cmd.index;
      assign ib_data_m = c_fwd_we[c-1] ? c_fwd_data[c-1] : cmd.data;
      assign psum_in   = c_ob_rd[c-1];
    end else begin : g_first
      assign ib_we_m   = c_ib_we[c];
      assign ib_addr_m = cmd.index;
      assign ib_data_m = cmd.data;
      assign psum_in   = '0;
    end

    if (c < N_CORES - 1) begin : g_psum
      assign psum_rd[c] = c_busy[c+1] & c_acc[c+1];
      assign c_ob_ra[c] = psum_rd[c] ? c_psum_addr[c+1] : rd_addr;
    end else begin : g_last
      assign psum_rd[c] = 1'b0;
      assign c_ob_ra[c] = rd_addr;
    end

    reram_core #(.N_TILES(N_TILES)) u_core (
      .clk        (clk),
      .rst_n      (rst_n),
      .w_en       (c_w_en[c]),
      .w_tile     (cmd.tile),
      .w_group    (cmd.group),
      .w_row      (cmd.row),
      .w_col      (cmd.index[6:0]),
      .w_data     (cmd.data),
      .ib_we      (ib_we_m),
      .ib_addr    (ib_addr_m),
      .ib_data    (ib_data_m),
      .start      (c_start[c]),
      .acc_prev   (cmd.acc_prev && c > 0),
      .start_fwd  (c_fwd[c]),
      .fwd_shift  (cmd.shift),
      .busy       (c_busy[c]),
      .done       (c_done[c]),
      .ob_rd_addr (c_ob_ra[c]),
      .ob_rd_data (c_ob_rd[c]),
      .psum_addr  (c_psum_addr[c]),
      .psum_data  (psum_in),
      .fwd_we     (c_fwd_we[c]),
      .fwd_addr   (c_fwd_addr[c]),
      .fwd_data   (c_fwd_data[c]),
      .sat_event  (c_sat[c])
    );
  end

  assign core_busy = c_busy;
  assign sat_event = |c_sat;

  // ---------------- command decoder ----------------
  logic can_issue;
  int unsigned cc;

  always_comb begin
    cc = int'(cmd.core);
    can_issue = 1'b0;
    c_w_en = '0; c_ib_we = '0; c_start = '0; c_fwd = '0;
    rd_req = 1'b0;
    if (dec_valid && rd_st == 2'd0 && !rsp_v) begin
      unique case (cmd.op)
        CMD_WEIGHT: can_issue = !c_busy[cc];
        CMD_INPUT:  can_issue = !c_busy[cc] && !(cc > 0 && c_busy[cc-1] && fwd_q[cc-1]);
        CMD_RUN:    can_issue = !c_busy[cc] && !psum_rd[cc] &&
                                !(cc > 0 && c_busy[cc-1] && fwd_q[cc-1]) &&
                                !(cmd.acc_prev && cc > 0 && c_busy[cc-1]);
        CMD_FWD:    can_issue = (cc == N_CORES-1) ||
                                (!c_busy[cc] && !c_busy[cc+1] && !psum_rd[cc]);
        CMD_READ:   can_issue = !c_busy[cc] && !psum_rd[cc];
        default:    can_issue = 1'b1;   // unknown commands are dropped
      endcase
      if (can_issue) begin
        unique case (cmd.op)
          CMD_WEIGHT: c_w_en[cc]  = 1'b1;
          CMD_INPUT:  c_ib_we[cc] = 1'b1;
          CMD_RUN:    c_start[cc] = 1'b1;
          CMD_FWD:    if (cc < N_CORES-1) c_fwd[cc] = 1'b1;
          CMD_READ:   rd_req = 1'b1;
          default: ;
        endcase
      end
    end
  end

  assign dec_ready = can_issue;

  // which busy cores are running with acc_prev / forwarding
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_acc <= '0;
      fwd_q <= '0;
    end else begin
      for (int c = 0; c < N_CORES; c++) begin
        if (c_start[c]) begin
          c_acc[c] <= cmd.acc_prev && c > 0;
          fwd_q[c] <= 1'b0;
        end else if (c_fwd[c]) begin
          c_acc[c] <= 1'b0;
          fwd_q[c] <= 1'b1;
        end
      end
    end
  end

  // ---------------- read responses ----------------
  // cycle 0: READ issued; cycle 1: address at the output buffer;
  // cycle 2: data on the buffer output, captured; cycle 3: offered to the
  // response router.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_st    <= 2'd0;
      rd_core  <= '0;
      rd_addr  <= '0;
      rd_src   <= '0;
      rsp_v    <= 1'b0;
      rsp_flit <= '0;
    end else begin
      if (rd_req) begin
        rd_st   <= 2'd1;
        rd_core <= cmd.core;
        rd_addr <= cmd.index;
        rd_src  <= cmd_src;
      end else if (rd_st == 2'd1) begin
        rd_st   <= 2'd2;
      end else if (rd_st == 2'd2) begin
        rd_st   <= 2'd0;
      end
      if (rd_st == 2'd2) begin
        rsp_v    <= 1'b1;
        rsp_flit <= {c_ob_rd[rd_core], rd_src};
      end else if (rsp_v && rsp_ready) begin
        rsp_v <= 1'b0;
      end
    end
  end

  // ---------------- response router: one decoder to many vertical links ---
  logic [NUM_VL-1:0][RF_W-1:0] rf_out;

  noc_router #(.N_IN(1), .N_OUT(NUM_VL), .FLIT_W(RF_W), .DEPTH(4)) u_rsp_router (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (rsp_v),
    .in_ready (rsp_ready),
    .in_flit  (rsp_flit),
    .out_valid(vl_out_valid),
    .out_ready(vl_out_ready),
    .out_flit (rf_out)
  );

  for (genvar v = 0; v < NUM_VL; v++) begin : g_rf
    assign vl_out_data[v] = rf_out[v][RF_W-1 -: ACC_W];
  end

endmodule
