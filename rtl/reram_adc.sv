// reram_adc: behavioural model of the 8-bit ADC that digitises the column
// sum of one crossbar. The real part is a mixed-signal converter; this model
// takes the column current as an integer (see reram_crossbar).
//
// Function. code = min(col_sum, 2^BITS - 1). A 128-row crossbar of 2-bit
// cells driven by 1-bit inputs can produce sums up to 384, one bit more than
// an 8-bit ADC resolves; sums above 255 saturate and raise sat for that
// conversion.
//
// Timing. One conversion per cycle: en samples col_sum at the clock edge and
// code/sat are valid the cycle after.
//
// From the specification: one ADC per crossbar, 8 bits. This design's own
// choice: clipping above full scale (the specification does not say how the
// ninth bit of range is handled).
module reram_adc #(
  parameter int unsigned IN_W = 9,
  parameter int unsigned BITS = 8
) (
  input  logic            clk,
  input  logic            en,
  input  logic [IN_W-1:0] col_sum,
  output logic [BITS-1:0] code,
  output logic            sat
);

  localparam logic [IN_W-1:0] FULL = IN_W'((1 << BITS) - 1);

  always_ff @(posedge clk) begin
    if (en) begin
      if (col_sum > FULL) begin
        code <= BITS'(FULL);
        sat  <= 1'b1;
      end else begin
        code <= BITS'(col_sum);
        sat  <= 1'b0;
      end
    end
  end

endmodule
