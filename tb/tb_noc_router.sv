// tb_noc_router: self-checking testbench of noc_router.
//
// A 3-input, 2-output router (a 5-port router) carries random single-flit
// packets from all inputs at once while the outputs apply random
// back-pressure. Every flit carries its input port and a sequence number;
// the testbench checks that each flit leaves on the output named in its
// header, that flits of one input to one output keep their order, and that
// none is lost or duplicated. It also counts arbitration conflicts (two
// inputs wanting one output) and full FIFOs (input not ready); both must
// occur.
module tb_noc_router;
  localparam int NI = 3, NO = 2, W = 24, N_PER_IN = 400;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NI-1:0]         in_valid = '0;
  logic [NI-1:0]         in_ready;
  logic [NI-1:0][W-1:0]  in_flit = '0;
  logic [NO-1:0]         out_valid;
  logic [NO-1:0]         out_ready = '0;
  logic [NO-1:0][W-1:0]  out_flit;

  noc_router #(.N_IN(NI), .N_OUT(NO), .FLIT_W(W), .DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int sent [NI];
  int next_seq [NI][NO];   // expected next sequence number per (input, output)
  int sent_to [NI][NO];
  int received = 0, conflicts = 0, full = 0;

  // flit: {seq[15:0], src[1:0], pad[4:0], dest[0]}
  function automatic logic [W-1:0] mk(int src, int seq, int dst);
    return {16'(seq), 2'(src), 5'd0, 1'(dst)};
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-input sequence numbers across both outputs, checked per (src,dst)
  int seq_cnt [NI][NO];

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NI; i++) if (!in_ready[i] && in_valid[i]) full++;
    for (int o = 0; o < NO; o++) begin
      int n;
      n = 0;
      for (int i = 0; i < NI; i++)
        if (dut.head_v[i] && dut.head_dest[i] == 1'(o)) n++;
      if (n > 1) conflicts++;
      if (out_valid[o] && out_ready[o]) begin
        int src, seq;
        src = int'(out_flit[o][7:6]);
        seq = int'(out_flit[o][23:8]);
        checks++;
        received++;
        if (int'(out_flit[o][0]) != o || src >= NI || seq != next_seq[src][o]) begin
          failures++;
          if (failures < 10) $display("out %0d: bad flit %h (expected seq %0d)", o, out_flit[o], next_seq[src][o]);
        end else next_seq[src][o]++;
      end
    end
  end

  for (genvar i = 0; i < NI; i++) begin : g_src
    initial begin
      for (int o = 0; o < NO; o++) begin seq_cnt[i][o] = 0; next_seq[i][o] = 0; end
      sent[i] = 0;
      @(posedge rst_n);
      while (sent[i] < N_PER_IN) begin
        int d;
        d = $urandom_range(NO-1);
        @(negedge clk);
        in_valid[i] = 1'b1;
        in_flit[i]  = mk(i, seq_cnt[i][d], d);
        @(posedge clk);
        while (!in_ready[i]) @(posedge clk);
        seq_cnt[i][d]++;
        sent[i]++;
        #1 in_valid[i] = 1'b0;
      end
    end
  end

  always @(negedge clk) out_ready <= NO'($urandom) | NO'($urandom);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (received == NI * N_PER_IN);
    repeat (20) @(negedge clk);
    checks++;
    if (received != NI * N_PER_IN) failures++;
    checks++;
    if (conflicts == 0) begin failures++; $display("no arbitration conflict seen"); end
    checks++;
    if (full == 0) begin failures++; $display("no back-pressure seen"); end
    $display("conflicts %0d, cycles with a full input FIFO %0d", conflicts, full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
