// shift_add: the shift-and-add (S+A) unit of a ReRAM tile.
//
// A 16-bit weight is spread over 8 crossbars, 2 bits per cell; slice s holds
// weight bits 2s+1:2s. Inputs enter bit-serially through 1-bit DACs, one bit
// b per step. For one column and one input bit the ADCs of all 12 groups x 8
// slices deliver codes; this unit forms
//     term = sign(b) * 2^b * sum_g sum_s code[g][s] * 4^s
// where sign(b) is -1 for the input's sign bit (b = 15, two's complement)
// and +1 otherwise. The tile adds term into the output register of the
// column. Summing over the 12 groups makes one tile a 1536 x 128
// matrix-vector product.
//
// Timing. Fully pipelined, one result per cycle, latency one cycle:
// in_valid/codes/bit_idx/col are registered into out_valid/term/out_col.
//
// From the specification: the S+A block, 2-bit cells, 1-bit inputs, 16-bit
// precision, 8-bit ADC codes. This design's own choices: two's complement
// inputs with a negative-weighted sign bit, and the sum over groups.
module shift_add
  import hetrax_pkg::*;
#(
  parameter int unsigned NG    = GROUPS,
  parameter int unsigned NS    = SLICES,
  parameter int unsigned CODE_W = ADC_BITS,
  parameter int unsigned OUT_W = ACC_W,
  parameter int unsigned IN_BITS = DATA_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic [NG-1:0][NS-1:0][CODE_W-1:0] codes,
  input  logic [$clog2(IN_BITS)-1:0]        bit_idx,
  input  logic [6:0]                        col,
  output logic                              out_valid,
  output logic signed [OUT_W-1:0]           term,
  output logic [6:0]                        out_col
);

  // width of sum_g sum_s code * 4^s
  localparam int unsigned PART_W = CODE_W + CELL_BITS * NS + $clog2(NG) + 1;

  logic [PART_W-1:0]       part;
  logic signed [OUT_W-1:0] shifted;

  always_comb begin
    part = '0;
    for (int g = 0; g < NG; g++)
      for (int s = 0; s < NS; s++)
        part = part + (PART_W'(codes[g][s]) << (CELL_BITS * s));
    shifted = $signed(OUT_W'(part)) <<< bit_idx;
    if (bit_idx == $clog2(IN_BITS)'(IN_BITS - 1))
      shifted = -shifted;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      term      <= '0;
      out_col   <= '0;
    end else begin
      out_valid <= in_valid;
      term      <= shifted;
      out_col   <= col;
    end
  end

endmodule
