// tb_shift_add: self-checking testbench of the shift-and-add unit.
//
// Drives random ADC codes for all 12 x 8 crossbars with random input-bit
// positions and columns, one set per cycle, and compares each registered
// term with sum(code * 4^slice) * 2^bit, negated for the sign bit 15. Also
// checks the extremes (all codes 255 at bit 0 and bit 15) and that the
// result appears exactly one cycle after the inputs.
module tb_shift_add;
  import hetrax_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                                        in_valid = 1'b0;
  logic [GROUPS-1:0][SLICES-1:0][ADC_BITS-1:0] codes = '0;
  logic [3:0]                                  bit_idx = '0;
  logic [6:0]                                  col = '0;
  logic                                        out_valid;
  logic signed [ACC_W-1:0]                     term;
  logic [6:0]                                  out_col;

  shift_add dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint expect_term();
    longint p = 0;
    for (int g = 0; g < GROUPS; g++)
      for (int s = 0; s < SLICES; s++)
        p += longint'(codes[g][s]) * (longint'(1) << (2*s));
    p = p * (longint'(1) << bit_idx);
    return (bit_idx == 4'd15) ? -p : p;
  endfunction

  task automatic one(bit all_max, int b);
    longint e;
    @(negedge clk);
    in_valid = 1'b1;
    bit_idx = 4'(b);
    col = 7'($urandom);
    for (int g = 0; g < GROUPS; g++)
      for (int s = 0; s < SLICES; s++)
        codes[g][s] = all_max ? 8'hff : 8'($urandom);
    e = expect_term();
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!out_valid || term != ACC_W'(e) || out_col != col) begin
      failures++;
      if (failures < 10) $display("bit %0d: got %0d expected %0d", b, term, e);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    one(1'b1, 0);
    one(1'b1, 15);
    for (int k = 0; k < 2000; k++) one(1'b0, $urandom_range(15));
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("valid did not drop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
