// noc_router: input-queued router of the HeTraX network-on-chip.
//
// The NoC joins cores of different kinds over planar and vertical (TSV)
// links in an irregular topology; its routers have between 2 and 6 ports.
// This router has N_IN input ports and N_OUT output ports. Each flit carries
// its destination output port in its low DEST_W bits (the route is worked
// out offline for the fixed core placement, so the header already names the
// output port of every hop). Every input has a FIFO of DEPTH flits; an input
// is ready whenever its FIFO has room (FIFO-based flow control). Each output
// picks among the inputs whose head flit wants it with a round-robin
// arbiter, and moves one flit per cycle under valid/ready.
//
// Timing. A flit written into an empty FIFO can leave on the next cycle:
// latency 1 cycle, throughput 1 flit per cycle per output.
//
// From the specification: FIFO-based flow control, routers of 2 to 6 ports,
// and the many-to-few traffic between cores and memory controllers. This
// design's own choices: source-set output port in the header, FIFO depth,
// round-robin arbitration and single-flit packets.
module noc_router #(
  parameter int unsigned N_IN   = 2,
  parameter int unsigned N_OUT  = 2,
  parameter int unsigned FLIT_W = 32,
  parameter int unsigned DEPTH  = 4,
  localparam int unsigned DEST_W = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_IN-1:0]              in_valid,
  output logic [N_IN-1:0]              in_ready,
  input  logic [N_IN-1:0][FLIT_W-1:0]  in_flit,
  output logic [N_OUT-1:0]             out_valid,
  input  logic [N_OUT-1:0]             out_ready,
  output logic [N_OUT-1:0][FLIT_W-1:0] out_flit
);

  localparam int unsigned PW = $clog2(DEPTH);

  // ---------------- input FIFOs ----------------
  logic [FLIT_W-1:0] fifo [N_IN][DEPTH];
  logic [PW-1:0]     rd_ptr [N_IN];
  logic [PW-1:0]     wr_ptr [N_IN];
  logic [PW:0]       count  [N_IN];
  logic [N_IN-1:0]   pop;

  logic [N_IN-1:0]              head_v;
  logic [N_IN-1:0][FLIT_W-1:0]  head;
  logic [N_IN-1:0][DEST_W-1:0]  head_dest;

  for (genvar i = 0; i < N_IN; i++) begin : g_in
    assign in_ready[i]  = (count[i] < (PW+1)'(DEPTH));
    assign head_v[i]    = (count[i] != '0);
    assign head[i]      = fifo[i][rd_ptr[i]];
    assign head_dest[i] = (N_OUT > 1) ? head[i][DEST_W-1:0] : '0;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr[i] <= '0;
        wr_ptr[i] <= '0;
        count[i]  <= '0;
      end else begin
        if (in_valid[i] && in_ready[i]) begin
          fifo[i][wr_ptr[i]] <= in_flit[i];
          wr_ptr[i] <= (wr_ptr[i] == PW'(DEPTH - 1)) ? '0 : wr_ptr[i] + PW'(1);
        end
        if (pop[i])
          rd_ptr[i] <= (rd_ptr[i] == PW'(DEPTH - 1)) ? '0 : rd_ptr[i] + PW'(1);
        count[i] <= count[i] + (PW+1)'(in_valid[i] && in_ready[i]) - (PW+1)'(pop[i]);
      end
    end
  end

  // ---------------- round-robin output arbitration ----------------
  localparam int unsigned IW = (N_IN > 1) ? $clog2(N_IN) : 1;
  logic [IW-1:0]   last [N_OUT];   // input granted last
  logic [N_OUT-1:0]           grant_v;
  logic [N_OUT-1:0][IW-1:0]   grant;

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      grant_v[o] = 1'b0;
      grant[o]   = '0;
      // search from the input after the last one granted
      for (int k = 1; k <= N_IN; k++) begin
        int i;
        i = (int'(last[o]) + k) % N_IN;
        if (!grant_v[o] && head_v[i] && int'(head_dest[i]) == o) begin
          grant_v[o] = 1'b1;
          grant[o]   = IW'(i);
        end
      end
      out_valid[o] = grant_v[o];
      out_flit[o]  = head[grant[o]];
    end
  end

  // a head flit leaves when its output takes it
  always_comb begin
    pop = '0;
    for (int o = 0; o < N_OUT; o++)
      if (grant_v[o] && out_ready[o]) pop[grant[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < N_OUT; o++) last[o] <= IW'(N_IN - 1);
    end else begin
      for (int o = 0; o < N_OUT; o++)
        if (grant_v[o] && out_ready[o]) last[o] <= grant[o];
    end
  end

`ifndef SYNTHESIS
  // a flit offered on an output stays until it is taken
  for (genvar o = 0; o < N_OUT; o++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     out_valid[o] && !out_ready[o] |=> out_valid[o])
      else $error("noc_router: output %0d dropped a flit", o);
  end
`endif

endmodule
