// tb_dma_engine: a model memory (one-cycle read latency, random refusals)
// feeds the DMA engine; the network side pushes back at random. Checks the
// address and data of every doubleword, the done pulse of each channel, the
// channel order when both are started together, and that with no stalls a
// block of 64 doublewords streams out at one per cycle.
module tb_dma_engine;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [1:0] cfg_src_we = 0, cfg_dst_we = 0, cfg_cnt_we = 0, done;
  logic [31:0] cfg_wd = 0;
  logic [1:0][15:0] remaining;
  logic busy, mem_req, mem_gnt, mem_rvalid, out_valid, out_ready;
  logic [14:0] mem_addr;
  logic [63:0] mem_rdata, out_data;
  logic [31:0] out_addr;
  dma_engine dut (.*);
  always #5 clk = ~clk;

  logic stall = 0;
  // memory model: content = f(address)
  function automatic logic [63:0] val(logic [14:0] a);
    return {17'd0, a, 32'hC0DE0000 ^ 32'(a)};
  endfunction
  always @(negedge clk) begin
    mem_gnt   = stall ? 1'($urandom) : 1'b1;
    out_ready = stall ? 1'($urandom) : 1'b1;
  end
  always @(posedge clk) begin
    mem_rvalid <= mem_req && mem_gnt;
    mem_rdata  <= val(mem_addr);
  end

  logic [31:0] exp_addr [$];
  logic [63:0] exp_data [$];
  int first_out = -1, last_out = -1, cyc = 0, ndone [2];
  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int c = 0; c < 2; c++) if (done[c]) ndone[c]++;
    if (out_valid && out_ready) begin
      checks++;
      if (exp_addr.size() == 0 || out_addr !== exp_addr[0] || out_data !== exp_data[0]) begin
        failures++; $display("FAIL out %h %h", out_addr, out_data);
      end else begin void'(exp_addr.pop_front()); void'(exp_data.pop_front()); end
      if (first_out < 0) first_out = cyc;
      last_out = cyc;
    end
  end

  task automatic setup_ch(int ch, logic [31:0] src, logic [31:0] dst, int n);
    @(negedge clk); cfg_src_we[ch] = 1; cfg_wd = src; @(negedge clk); cfg_src_we = 0;
    cfg_dst_we[ch] = 1; cfg_wd = dst; @(negedge clk); cfg_dst_we = 0;
    for (int k = 0; k < n; k++) begin
      exp_addr.push_back(dst + 32'(8 * k));
      exp_data.push_back(val(15'(src + 32'(8 * k))));
    end
  endtask
  task automatic go(int ch, int n);
    cfg_cnt_we[ch] = 1; cfg_wd = n;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    // throughput: 64 doublewords, no stalls
    setup_ch(0, 32'h2000, 32'h8E000000, 64);
    @(negedge clk); go(0, 64); @(negedge clk); cfg_cnt_we = 0;
    wait (ndone[0] == 1);
    @(negedge clk);
    checks++;
    if (last_out - first_out != 63) begin failures++; $display("FAIL 64 doublewords took %0d cycles", last_out - first_out + 1); end
    // with stalls: channel 0 runs; channel 1 then channel 0 are started while
    // it is busy; channel 0 must go again before channel 1
    stall = 1;
    setup_ch(0, 32'h6000, 32'h80800000, 17);
    @(negedge clk); go(0, 17); @(negedge clk); cfg_cnt_we = 0;
    @(negedge clk); cfg_src_we[1] = 1; cfg_wd = 32'h4000; @(negedge clk); cfg_src_we = 0;
    cfg_dst_we[1] = 1; cfg_wd = 32'h84A00100; @(negedge clk); cfg_dst_we = 0;
    go(1, 9); @(negedge clk); cfg_cnt_we = 0;
    setup_ch(0, 32'h1000, 32'h80900000, 5);
    go(0, 5); @(negedge clk); cfg_cnt_we = 0;
    checks++;
    if (!busy || ndone[0] != 1) begin failures++; $display("FAIL second transfer ended too early"); end
    for (int k = 0; k < 9; k++) begin
      exp_addr.push_back(32'h84A00100 + 32'(8 * k));
      exp_data.push_back(val(15'(32'h4000 + 32'(8 * k))));
    end
    wait (ndone[1] == 1);
    repeat (3) @(negedge clk);
    checks++;
    if (ndone[0] != 3 || exp_addr.size() != 0 || busy) begin failures++; $display("FAIL done %0d left %0d", ndone[0], exp_addr.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
