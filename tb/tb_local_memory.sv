// tb_local_memory: random byte-enabled reads and writes on all four ports
// against a byte-array model; checks that accesses to four different banks
// are all granted in one cycle and that a bank conflict grants only the
// lowest-numbered port.
module tb_local_memory;
  int checks = 0, failures = 0, conflicts = 0;
  localparam int MB = 32768;
  logic clk = 0, rst_n = 0;
  logic [3:0] req, we, gnt, rvalid;
  logic [3:0][14:0] addr;
  logic [3:0][7:0] be;
  logic [3:0][63:0] wdata, rdata;
  local_memory dut (.*);
  always #5 clk = ~clk;
  logic [7:0] model [MB];
  logic [3:0][63:0] expd;
  logic [3:0] expv;

  initial begin
    req = 0; we = 0; addr = '0; be = '0; wdata = '0; expv = 0;
    for (int k = 0; k < MB; k++) model[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // clear memory through port 1
    for (int k = 0; k < MB / 8; k++) begin
      @(negedge clk); req = 4'b0010; we = 4'b0010; addr[1] = 15'(k * 8); be[1] = 8'hFF; wdata[1] = 0;
    end
    @(negedge clk); req = 0;
    // four different banks: all granted
    @(negedge clk);
    req = 4'hF; we = 4'h0;
    for (int p = 0; p < 4; p++) addr[p] = 15'(p * 8192 + 64);
    #1;
    checks++; if (gnt !== 4'hF) begin failures++; $display("FAIL parallel banks gnt=%b", gnt); end
    // same bank: only port 0
    @(negedge clk);
    for (int p = 0; p < 4; p++) addr[p] = 15'(p * 8);
    #1;
    checks++; if (gnt !== 4'h1) begin failures++; $display("FAIL conflict gnt=%b", gnt); end
    @(negedge clk); req = 0;
    // random traffic
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      for (int p = 0; p < 4; p++) begin
        req[p] = 1'($urandom);
        we[p]  = 1'($urandom);
        addr[p] = 15'($urandom) & ~15'd7;
        if ($urandom_range(0, 3) == 0) addr[p][14:13] = 2'd1;
        be[p] = 8'($urandom);
        wdata[p] = {$urandom, $urandom};
      end
      @(posedge clk);
      // check reads from the previous cycle
      for (int p = 0; p < 4; p++) if (expv[p]) begin
        checks++;
        if (!rvalid[p] || rdata[p] !== expd[p]) begin failures++; $display("FAIL read p%0d %h exp %h", p, rdata[p], expd[p]); end
      end
      expv = 0;
      if ($countones(req) != $countones(gnt)) conflicts++;
      for (int p = 0; p < 4; p++) if (gnt[p]) begin
        if (we[p]) begin
          for (int b = 0; b < 8; b++) if (be[p][b]) model[int'(addr[p]) + b] = wdata[p][8*b +: 8];
        end else begin
          expv[p] = 1;
          for (int b = 0; b < 8; b++) expd[p][8*b +: 8] = model[int'(addr[p]) + b];
        end
      end
    end
    @(negedge clk); req = 0;
    @(posedge clk);
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no conflicts seen"); end
    $display("INFO conflicts=%0d", conflicts);
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
