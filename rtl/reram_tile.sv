// reram_tile: one ReRAM tile, the unit that multiplies an activation vector
// by a block of stationary weights inside the crossbars.
//
// Organisation. 96 crossbars of 128x128 two-bit cells form 12 groups of 8.
// Group g holds a 128x128 block of 16-bit weights W_g, weight bit pair 2s+1:2s
// in crossbar 8g+s. The input register (IR) holds 12 x 128 activations, the
// output register (OR) holds 128 accumulated results. The tile computes
//     OR[c] = sum_g sum_r IR[128g + r] * W_g[r][c]        c = 0..127
// i.e. a 1536 x 128 matrix-vector product.
//
// How it works. The activations are applied bit-serially through 1-bit
// DACs: for input bit b = 0..15 and column c = 0..127 every crossbar sums
// its column c over the rows whose input bit is 1; each crossbar's ADC
// digitises the sum; the shift-and-add unit weights the 96 codes by 4^s and
// 2^b (negative for the sign bit) and adds the result into OR[c].
// Weights are stored with an offset, u = w + 2^15, so all cells hold
// non-negative levels; at the start of a run OR is preset to
// -2^15 * sum(IR), which removes the offset exactly. The sum of the IR is
// kept up to date on every IR write.
//
// Interface and timing.
//   w_*      program one weight (group, row, col) in one cycle: 8 cells.
//   in_*     write one IR entry; in_idx = 128*group + row.
//   start    begins a run when idle; busy stays high until the done pulse.
//            A run takes 16 x 128 = 2048 issue cycles plus a 4-cycle pipeline
//            (crossbar read, ADC, S+A, OR update): done comes 2053 cycles
//            after the start edge. Writes are ignored while busy.
//   rd_col   selects OR[rd_col] on rd_data (combinational).
//   sat_event pulses when any ADC clipped during a conversion.
//
// From the specification: 96 crossbars, 96 8-bit ADCs, 12 x 128 x 8 1-bit
// DACs, 128x128 crossbars, 2 bits per cell, 16-bit precision, and the IR, OR,
// S+A and ADC blocks of the tile. This design's own choices: the offset
// weight encoding, the group-summed dataflow, one column per cycle through
// each ADC, and saturation of column sums above the ADC range.
module reram_tile
  import hetrax_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // weight programming
  input  logic                      w_en,
  input  logic [3:0]                w_group,
  input  logic [6:0]                w_row,
  input  logic [6:0]                w_col,
  input  logic [DATA_W-1:0]         w_data,
  // input register
  input  logic                      in_en,
  input  logic [10:0]               in_idx,
  input  logic [DATA_W-1:0]         in_data,
  // run control
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  // output register
  input  logic [6:0]                rd_col,
  output logic signed [ACC_W-1:0]   rd_data,
  output logic                      sat_event
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state;

  // ---------------- input register and its running sum ----------------
  logic [DATA_W-1:0]     ir [TILE_IN];
  logic signed [31:0]    ir_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < TILE_IN; i++) ir[i] <= '0;
      ir_sum <= '0;
    end else if (in_en && state == S_IDLE && in_idx < 11'(TILE_IN)) begin
      ir[in_idx] <= in_data;
      ir_sum     <= ir_sum + 32'($signed(in_data)) - 32'($signed(ir[in_idx]));
    end
  end

  // ---------------- sequencing ----------------
  logic [3:0] bit_q;
  logic [6:0] col_q;
  logic       v0, v1, v2;
  logic       sa_valid;
  logic [3:0] bit1, bit2;
  logic [6:0] col1, col2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      bit_q <= '0;
      col_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_RUN;
          bit_q <= '0;
          col_q <= '0;
        end
        S_RUN: begin
          col_q <= col_q + 7'd1;
          if (col_q == 7'(XB_COLS - 1)) begin
            bit_q <= bit_q + 4'd1;
            if (bit_q == 4'(DATA_W - 1)) state <= S_DRAIN;
          end
        end
        S_DRAIN: if (!v1 && !v2 && !sa_valid) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign v0   = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0;
      bit1 <= '0; bit2 <= '0; col1 <= '0; col2 <= '0;
    end else begin
      v1 <= v0;   v2 <= v1;
      bit1 <= bit_q; bit2 <= bit1;
      col1 <= col_q; col2 <= col1;
    end
  end

  // ---------------- crossbars and ADCs ----------------
  // bit plane of the current input bit, per group
  logic [GROUPS-1:0][XB_ROWS-1:0] plane;
  always_comb begin
    for (int g = 0; g < GROUPS; g++)
      for (int r = 0; r < XB_ROWS; r++)
        plane[g][r] = ir[g*XB_ROWS + r][bit_q];
  end

  // offset-encoded weight being programmed
  logic [DATA_W-1:0] w_u;
  assign w_u = w_data + DATA_W'(WEIGHT_BIAS);

  logic [GROUPS-1:0][SLICES-1:0][ADC_BITS-1:0] codes;
  logic [GROUPS-1:0][SLICES-1:0]               sats;

  for (genvar g = 0; g < GROUPS; g++) begin : g_grp
    for (genvar s = 0; s < SLICES; s++) begin : g_slc
      // an unprogrammed cell stores the offset of weight 0 (u = 2^15)
      localparam logic [CELL_BITS-1:0] INIT =
        CELL_BITS'((WEIGHT_BIAS >> (CELL_BITS * s)) & ((1 << CELL_BITS) - 1));
      logic [COLSUM_W-1:0] col_sum;

      reram_crossbar #(.INIT_CELL(INIT)) u_xb (
        .clk     (clk),
        .wr_en   (w_en && state == S_IDLE && w_group == 4'(g)),
        .wr_row  (w_row),
        .wr_col  (w_col),
        .wr_cell (w_u[CELL_BITS*s +: CELL_BITS]),
        .rd_en   (v0),
        .row_in  (plane[g]),
        .rd_col  (col_q),
        .col_sum (col_sum)
      );

      reram_adc #(.IN_W(COLSUM_W), .BITS(ADC_BITS)) u_adc (
        .clk     (clk),
        .en      (v1),
        .col_sum (col_sum),
        .code    (codes[g][s]),
        .sat     (sats[g][s])
      );
    end
  end

  assign sat_event = v2 && (|sats);

  // ---------------- shift-and-add and output register ----------------
  logic signed [ACC_W-1:0]  sa_term;
  logic [6:0]               sa_col;

  shift_add u_sa (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (v2),
    .codes    (codes),
    .bit_idx  (bit2),
    .col      (col2),
    .out_valid(sa_valid),
    .term     (sa_term),
    .out_col  (sa_col)
  );

  logic signed [ACC_W-1:0] orr [XB_COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < XB_COLS; c++) orr[c] <= '0;
    end else if (state == S_IDLE && start) begin
      // remove the weight offset: -2^15 * sum of the inputs
      for (int c = 0; c < XB_COLS; c++)
        orr[c] <= -($signed(ACC_W'(ir_sum)) <<< (DATA_W - 1));
    end else if (sa_valid) begin
      orr[sa_col] <= orr[sa_col] + sa_term;
    end
  end

  assign rd_data = orr[rd_col];

endmodule
