// edram_buffer: the eDRAM activation buffer of a ReRAM core.
//
// A simple dual-port memory: one write port and one read port, both
// synchronous. rd_data returns the word at rd_addr one cycle after the
// address is presented. A write and a read of the same address in one cycle
// return the old word. Contents are not reset (as in a real eDRAM); every
// word must be written before it is read.
//
// The specification names eDRAM among the peripherals of a ReRAM core. Its
// size, ports and refresh are not given: the depth and width are set by the
// core (1536 x 16-bit inputs, 2048 x 48-bit results) and refresh is not
// modelled. These are this design's own choices.
module edram_buffer #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 48,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WIDTH-1:0] wr_data,
  input  logic [AW-1:0]    rd_addr,
  output logic [WIDTH-1:0] rd_data
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    rd_data <= mem[rd_addr];
  end

endmodule
