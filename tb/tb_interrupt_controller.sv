// tb_interrupt_controller: checks latching, masking, the global disable,
// priority order, nesting (a higher-priority interrupt enters while a lower
// one is in service, a lower one waits) and RTI clearing the top in-service bit.
module tb_interrupt_controller;
  import epiphany_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [9:0] irq = 0, imask_wd = 0, ilat_set = 0, ilat_clr = 0, imask, ilat, ipend;
  logic gid = 0, take_ok = 0, take, rti = 0, imask_we = 0;
  logic [3:0] take_num;
  interrupt_controller dut (.*);
  always #5 clk = ~clk;

  task automatic expect_take(logic exp, int num, string what);
    #1;
    checks++;
    if (take !== exp || (exp && take_num != 4'(num))) begin
      failures++; $display("FAIL %s: take=%b num=%0d", what, take, take_num);
    end
  endtask
  task automatic pulse(int n);
    @(negedge clk); irq[n] = 1; @(negedge clk); irq[n] = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    pulse(IRQ_DMA1);
    @(negedge clk); take_ok = 0; expect_take(0, 0, "no take without take_ok");
    checks++; if (ilat[IRQ_DMA1] !== 1) begin failures++; $display("FAIL latch"); end
    // mask it
    @(negedge clk); imask_we = 1; imask_wd = 10'h080; @(negedge clk); imask_we = 0;
    take_ok = 1; expect_take(0, 0, "masked");
    @(negedge clk); imask_we = 1; imask_wd = 0; @(negedge clk); imask_we = 0;
    gid = 1; expect_take(0, 0, "global disable");
    gid = 0; expect_take(1, IRQ_DMA1, "dma1");
    @(negedge clk); take_ok = 0;
    checks++; if (ipend !== 10'h080) begin failures++; $display("FAIL ipend %b", ipend); end
    // lower priority waits, higher priority nests
    pulse(IRQ_USER); pulse(IRQ_TIMER0);
    @(negedge clk); take_ok = 1; expect_take(1, IRQ_TIMER0, "timer0 nests over dma1");
    @(negedge clk); take_ok = 1; expect_take(0, 0, "user blocked by in-service");
    checks++; if (ipend !== 10'h088) begin failures++; $display("FAIL nested ipend %b", ipend); end
    @(negedge clk); take_ok = 0; rti = 1; @(negedge clk); rti = 0;
    checks++; if (ipend !== 10'h080) begin failures++; $display("FAIL rti clears timer0 %b", ipend); end
    take_ok = 1; expect_take(0, 0, "user still blocked by dma1");
    @(negedge clk); take_ok = 0; rti = 1; @(negedge clk); rti = 0;
    take_ok = 1; expect_take(1, IRQ_USER, "user after rti");
    @(negedge clk); take_ok = 0;
    // software set / clear and simultaneous priority
    ilat_set = 10'h3FE; @(negedge clk); ilat_set = 0; ilat_clr = 10'h002; @(negedge clk); ilat_clr = 0;
    rti = 1; @(negedge clk); rti = 0;
    take_ok = 1; expect_take(1, IRQ_MEMFLT, "highest of many");
    @(negedge clk); take_ok = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
