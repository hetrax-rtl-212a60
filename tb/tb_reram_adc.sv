// tb_reram_adc: self-checking testbench of the ADC model.
//
// Sweeps every column sum 0..511 the 9-bit input can carry and checks the
// code (the sum itself up to 255, 255 above) and the saturation flag one
// cycle after the sample; also checks that the code holds when en is low.
module tb_reram_adc;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       en = 1'b0;
  logic [8:0] col_sum = '0;
  logic [7:0] code;
  logic       sat;

  reram_adc #(.IN_W(9), .BITS(8)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 512; v++) begin
      @(negedge clk);
      en = 1'b1; col_sum = 9'(v);
      @(negedge clk);
      en = 1'b0;
      checks++;
      if (int'(code) != ((v > 255) ? 255 : v) || sat != (v > 255)) begin
        failures++;
        if (failures < 10) $display("sum %0d: code %0d sat %0b", v, code, sat);
      end
    end
    // hold
    @(negedge clk);
    en = 1'b1; col_sum = 9'd77;
    @(negedge clk);
    en = 1'b0; col_sum = 9'd200;
    @(negedge clk);
    checks++;
    if (code != 8'd77) begin failures++; $display("code not held: %0d", code); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
