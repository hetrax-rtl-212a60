// reram_core: one ReRAM core of the FF tier, 16 tiles around two eDRAM
// buffers.
//
// Function. The 16 tiles share one 1536-entry input vector x and each holds
// a different 1536 x 128 weight block, so a core computes a 1536 x 2048
// matrix-vector product y = x W. Results are accumulated at 48 bits. A run
// may add the previous core's results (psum), which lets a weight matrix with
// more than 1536 rows be split over a chain of cores, and a core can pass its
// results, requantised to 16 bits, into the next core's input buffer. Both
// follow the one-way flow of activations from layer L_i to L_i+1 across the
// tier.
//
// N_TILES (default 16) sets the number of tiles; fewer tiles only serve
// short simulations of the whole tier.
//
// Sequence of a run (start):
//   LOAD    1536 cycles  input buffer -> the input registers of all tiles
//   COMPUTE 2053 cycles  all tiles run in parallel (see reram_tile)
//   GATHER  2048 cycles  tile output registers (+ psum_data) -> output buffer
// then done pulses. A forward (start_fwd) reads output words 0..1535 and
// writes sat16(y >>> fwd_shift) to fwd_addr/fwd_data, one word per cycle.
//
// Interface.
//   w_*        program one weight of one tile (one cycle, idle only).
//   ib_*       write the input buffer (idle only).
//   ob_rd_*    read the output buffer, one-cycle latency (any time but FWD).
//   psum_addr/psum_data read the previous core's output buffer during GATHER
//              when acc_prev was given with start.
//
// From the specification: 16 tiles per core, the eDRAM, 16-bit operands and
// the unidirectional, spatially partitioned FF mapping. This design's own
// choices: the sharing of one input vector by all tiles, the buffer sizes,
// the partial-sum chain and the requantisation by shift and saturation.
module reram_core
  import hetrax_pkg::*;
#(
  parameter int unsigned N_TILES = TILES_PER_CORE
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight programming
  input  logic                     w_en,
  input  logic [3:0]               w_tile,
  input  logic [3:0]               w_group,
  input  logic [6:0]               w_row,
  input  logic [6:0]               w_col,
  input  logic [DATA_W-1:0]        w_data,
  // input buffer write
  input  logic                     ib_we,
  input  logic [10:0]              ib_addr,
  input  logic [DATA_W-1:0]        ib_data,
  // control
  input  logic                     start,
  input  logic                     acc_prev,
  input  logic                     start_fwd,
  input  logic [5:0]               fwd_shift,
  output logic                     busy,
  output logic                     done,
  // output buffer read
  input  logic [10:0]              ob_rd_addr,
  output logic signed [ACC_W-1:0]  ob_rd_data,
  // partial sums from the previous core
  output logic [10:0]              psum_addr,
  input  logic signed [ACC_W-1:0]  psum_data,
  // forward to the next core's input buffer
  output logic                     fwd_we,
  output logic [10:0]              fwd_addr,
  output logic [DATA_W-1:0]        fwd_data,
  output logic                     sat_event
);

  typedef enum logic [2:0] {C_IDLE, C_LOAD, C_COMPUTE, C_GATHER, C_FWD} cstate_e;
  cstate_e state;

  logic [11:0] cnt;        // 0 .. 2048
  logic        rd_v;       // buffer word read last cycle is valid
  logic [10:0] rd_a;       // its address
  logic        acc_q;
  logic [5:0]  shift_q;

  // ---------------- input buffer ----------------
  logic [DATA_W-1:0] ib_q;
  edram_buffer #(.DEPTH(TILE_IN), .WIDTH(DATA_W)) u_ib (
    .clk     (clk),
    .we      (ib_we && state == C_IDLE && ib_addr < 11'(TILE_IN)),
    .wr_addr (ib_addr),
    .wr_data (ib_data),
    .rd_addr (cnt[10:0]),
    .rd_data (ib_q)
  );

  // ---------------- tiles ----------------
  logic [N_TILES-1:0]                 t_busy, t_done, t_sat;
  logic signed [ACC_W-1:0]                   t_data [N_TILES];
  logic                                      t_start;

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    reram_tile u_tile (
      .clk      (clk),
      .rst_n    (rst_n),
      .w_en     (w_en && state == C_IDLE && w_tile == 4'(t)),
      .w_group  (w_group),
      .w_row    (w_row),
      .w_col    (w_col),
      .w_data   (w_data),
      .in_en    (state == C_LOAD && rd_v),
      .in_idx   (rd_a),
      .in_data  (ib_q),
      .start    (t_start),
      .busy     (t_busy[t]),
      .done     (t_done[t]),
      .rd_col   (cnt[6:0]),
      .rd_data  (t_data[t]),
      .sat_event(t_sat[t])
    );
  end

  assign sat_event = |t_sat;

  // ---------------- output buffer ----------------
  logic                    ob_we;
  logic [10:0]             ob_wa;
  logic signed [ACC_W-1:0] ob_wd;
  logic signed [ACC_W-1:0] gather_q;   // tile result read last cycle
  logic [10:0]             ob_ra;

  assign ob_ra = (state == C_FWD) ? cnt[10:0] : ob_rd_addr;

  edram_buffer #(.DEPTH(CORE_OUT), .WIDTH(ACC_W)) u_ob (
    .clk     (clk),
    .we      (ob_we),
    .wr_addr (ob_wa),
    .wr_data (ob_wd),
    .rd_addr (ob_ra),
    .rd_data (ob_rd_data)
  );

  assign psum_addr = cnt[10:0];

  always_comb begin
    ob_we = (state == C_GATHER) && rd_v;
    ob_wa = rd_a;
    ob_wd = gather_q + (acc_q ? psum_data : '0);
  end

  // saturate an accumulated value to 16 bits after an arithmetic shift
  function automatic logic [DATA_W-1:0] requant(input logic signed [ACC_W-1:0] v,
                                                input logic [5:0] sh);
    logic signed [ACC_W-1:0] s;
    s = v >>> sh;
    if (s > $signed(ACC_W'(32767)))       return 16'h7fff;
    else if (s < -$signed(ACC_W'(32768))) return 16'h8000;
    else                                  return s[DATA_W-1:0];
  endfunction

  assign fwd_we   = (state == C_FWD) && rd_v;
  assign fwd_addr = rd_a;
  assign fwd_data = requant(ob_rd_data, shift_q);

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= C_IDLE;
      cnt      <= '0;
      rd_v     <= 1'b0;
      rd_a     <= '0;
      acc_q    <= 1'b0;
      shift_q  <= '0;
      t_start  <= 1'b0;
      done     <= 1'b0;
      gather_q <= '0;
    end else begin
      done    <= 1'b0;
      t_start <= 1'b0;
      rd_v    <= 1'b0;
      rd_a    <= cnt[10:0];
      gather_q <= (int'(cnt[10:7]) < N_TILES) ? t_data[cnt[10:7]] : '0;
      unique case (state)
        C_IDLE: begin
          cnt <= '0;
          if (start) begin
            state <= C_LOAD;
            acc_q <= acc_prev;
          end else if (start_fwd) begin
            state   <= C_FWD;
            shift_q <= fwd_shift;
          end
        end
        C_LOAD: begin
          if (cnt < 12'(TILE_IN)) begin
            rd_v <= 1'b1;
            cnt  <= cnt + 12'd1;
          end else begin
            // last input word is written this cycle
            state   <= C_COMPUTE;
            t_start <= 1'b1;
          end
        end
        C_COMPUTE: begin
          cnt <= '0;
          if (t_done[0]) state <= C_GATHER;
        end
        C_GATHER: begin
          if (cnt < 12'(CORE_OUT)) begin
            rd_v <= 1'b1;
            cnt  <= cnt + 12'd1;
          end else begin
            state <= C_IDLE;
            done  <= 1'b1;
          end
        end
        C_FWD: begin
          if (cnt < 12'(TILE_IN)) begin
            rd_v <= 1'b1;
            cnt  <= cnt + 12'd1;
          end else begin
            state <= C_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign busy = (state != C_IDLE);

`ifndef SYNTHESIS
  // all tiles are started together and must finish together
  assert property (@(posedge clk) disable iff (!rst_n) t_done[0] |-> &t_done)
    else $error("reram_core: tiles finished out of step");
`endif

endmodule
