// tb_edram_buffer: self-checking testbench of the eDRAM buffer.
//
// Writes random words to random addresses of a 2048 x 48 buffer, keeps a
// reference copy, and reads addresses back with the one-cycle read latency,
// including a read of the address being written in the same cycle (which
// must return the old word).
module tb_edram_buffer;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        we = 1'b0;
  logic [10:0] wr_addr = '0, rd_addr = '0;
  logic [47:0] wr_data = '0, rd_data;

  edram_buffer #(.DEPTH(2048), .WIDTH(48)) dut (.*);

  int checks = 0, failures = 0;
  logic [47:0] ref_mem [2048];
  bit          valid [2048];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2048; i++) valid[i] = 0;
    for (int k = 0; k < 6000; k++) begin
      int a, b;
      logic [47:0] d, e;
      bit          chk;
      a = $urandom_range(2047);
      b = (k % 7 == 0) ? a : $urandom_range(2047);
      d = {$urandom, $urandom};
      @(negedge clk);
      we = 1'b1; wr_addr = 11'(a); wr_data = d;
      rd_addr = 11'(b);
      e = ref_mem[b];
      chk = valid[b];
      @(negedge clk);
      we = 1'b0;
      ref_mem[a] = d; valid[a] = 1;
      if (chk) begin
        checks++;
        if (rd_data != e) begin
          failures++;
          if (failures < 10) $display("addr %0d: got %h expected %h", b, rd_data, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
