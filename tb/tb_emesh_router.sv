// tb_emesh_router: drives random unicast packets into all five ports of a
// router at (row 34, col 10) with random push-back on the outputs, and checks
// that every packet leaves exactly once, through the port the X-then-Y rule
// picks, in order per input/output pair, with nothing lost while the router
// pushes back. Then checks the one-cycle hop latency and the multicast fan-out.
module tb_emesh_router;
  import epiphany_pkg::*;
  int checks = 0, failures = 0, pushbacks = 0;
  logic clk = 0, rst_n = 0;
  logic [11:0] mcast_id = 12'hABC;
  logic       [4:0] in_valid, in_wait, out_valid, out_wait;
  emesh_pkt_t [4:0] in_pkt, out_pkt;
  emesh_router #(.ROW(6'd34), .COL(6'd10)) dut (.*);
  always #5 clk = ~clk;

  emesh_pkt_t q [5][5][$];   // expected, [input][output]
  int sent = 0, got = 0;

  function automatic int route(logic [31:0] a);
    if (a[25:20] > 10) return 1;
    if (a[25:20] < 10) return 3;
    if (a[31:26] > 34) return 2;
    if (a[31:26] < 34) return 0;
    return 4;
  endfunction

  function automatic emesh_pkt_t mk(int src, int seq);
    emesh_pkt_t p;
    p = '0;
    p.write = 1'b1;
    p.size  = SZ_DBL;
    p.addr  = {6'($urandom_range(32, 36)), 6'($urandom_range(8, 12)), 20'($urandom)};
    p.data  = {32'(src), 32'(seq)};
    return p;
  endfunction

  logic random_wait = 1;
  // outputs: random push-back, match against expectation
  always @(negedge clk) out_wait = random_wait ? 5'($urandom) & 5'($urandom) : '0;
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < 5; o++) begin
      if (out_valid[o] && !out_wait[o] && !out_pkt[o].mcast) begin
        int s; logic ok;
        s = int'(out_pkt[o].data[63:32]);
        checks++;
        ok = (s < 5) && q[s][o].size() > 0 && q[s][o][0] == out_pkt[o];
        if (!ok) begin failures++; $display("FAIL out %0d unexpected pkt %h", o, out_pkt[o]); end
        else void'(q[s][o].pop_front());
        got++;
      end
    end
    for (int i = 0; i < 5; i++) if (in_valid[i] && in_wait[i]) pushbacks++;
  end

  initial begin
    in_valid = '0; in_pkt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random traffic
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < 5; i++) begin
        if (!in_valid[i] || !in_wait[i]) begin   // previous one taken (or none)
          if ($urandom_range(0, 3) != 0) begin
            in_pkt[i] = mk(i, cyc);
            in_valid[i] = 1;
          end else in_valid[i] = 0;
        end
      end
      @(posedge clk);
      for (int i = 0; i < 5; i++)
        if (in_valid[i] && !in_wait[i]) begin q[i][route(in_pkt[i].addr)].push_back(in_pkt[i]); sent++; end
      @(negedge clk);
      for (int i = 0; i < 5; i++) if (in_valid[i] && !in_wait[i]) in_valid[i] = 0;
    end
    @(negedge clk); in_valid = '0; random_wait = 0;
    repeat (50) @(posedge clk);
    checks++;
    if (sent != got || sent < 1000) begin failures++; $display("FAIL sent %0d got %0d", sent, got); end
    checks++;
    if (pushbacks == 0) begin failures++; $display("FAIL push-back never happened"); end
    // hop latency: a packet presented at a clock edge is at the output after that edge
    @(negedge clk);
    in_pkt[3] = mk(3, 9999); in_pkt[3].addr = {6'd34, 6'd12, 20'h100}; in_valid[3] = 1;
    q[3][1].push_back(in_pkt[3]);
    @(posedge clk); #1 in_valid[3] = 0;
    checks++;
    if (!out_valid[1]) begin failures++; $display("FAIL one-cycle hop latency"); end
    repeat (3) @(posedge clk);
    // multicast from the local port: out on N,E,S,W
    @(negedge clk);
    in_pkt[4] = mk(4, 1); in_pkt[4].mcast = 1; in_pkt[4].addr = {12'hABC, 20'h0};
    in_valid[4] = 1;
    @(posedge clk); #1 in_valid[4] = 0;
    checks++;
    if (out_valid !== 5'b01111) begin failures++; $display("FAIL mcast from local: %b", out_valid); end
    repeat (3) @(posedge clk);
    // multicast arriving from the west, matching this node's multicast id: E, N, S and local
    @(negedge clk);
    in_pkt[3] = mk(3, 2); in_pkt[3].mcast = 1; in_pkt[3].addr = {12'hABC, 20'h0};
    in_valid[3] = 1;
    @(posedge clk); #1 in_valid[3] = 0;
    checks++;
    if (out_valid !== 5'b10111) begin failures++; $display("FAIL mcast from west: %b", out_valid); end
    repeat (3) @(posedge clk);
    // from the north, not matching: south only
    @(negedge clk);
    in_pkt[0] = mk(0, 3); in_pkt[0].mcast = 1; in_pkt[0].addr = {12'h123, 20'h0};
    in_valid[0] = 1;
    @(posedge clk); #1 in_valid[0] = 0;
    checks++;
    if (out_valid !== 5'b00100) begin failures++; $display("FAIL mcast from north: %b", out_valid); end
    repeat (3) @(posedge clk);
    $display("INFO sent=%0d pushbacks=%0d", sent, pushbacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
