// tb_event_timers: loads both timers, counts clock events on one and a
// sparse event on the other, and checks the exact expiry cycle, the single
// expired pulse, the stop at zero and that selector 0 holds the count.
module tb_event_timers;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [5:0] events;
  logic [1:0][2:0] sel;
  logic [1:0] load, expired;
  logic [31:0] load_val;
  logic [1:0][31:0] count;
  event_timers dut (.*);
  always #5 clk = ~clk;
  int exp_cnt [2];
  int pulses [2];
  int cyc = 0, fire0 = -1;

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int t = 0; t < 2; t++) if (expired[t]) begin pulses[t]++; if (t == 0 && fire0 < 0) fire0 = cyc; end
  end

  initial begin
    events = '0; sel = '0; load = 0; load_val = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); load = 2'b11; load_val = 20; @(negedge clk); load = 0;
    checks++; if (count[0] != 20 || count[1] != 20) begin failures++; $display("FAIL load"); end
    // selector 0: no counting
    repeat (5) @(negedge clk);
    checks++; if (count[0] != 20) begin failures++; $display("FAIL counted while off"); end
    sel[0] = 3'd1; sel[1] = 3'd3;
    events[1] = 1;
    begin
      int start;
      start = cyc;
      for (int k = 0; k < 30; k++) begin
        events[3] = (k % 3 == 0);
        @(negedge clk);
      end
      checks++; if (count[1] != 10 || pulses[1] != 0) begin failures++; $display("FAIL timer1 at 30: %0d %0d", count[1], pulses[1]); end
      for (int k = 30; k < 60; k++) begin
        events[3] = (k % 3 == 0);
        @(negedge clk);
      end
      checks++;
      if (fire0 - start != 21) begin failures++; $display("FAIL timer0 expired after %0d cycles", fire0 - start); end
    end
    checks++; if (pulses[0] != 1 || count[0] != 0) begin failures++; $display("FAIL timer0 pulses %0d count %0d", pulses[0], count[0]); end
    // 20 events of class 3 need 60 cycles; run more
    for (int k = 60; k < 90; k++) begin events[3] = (k % 3 == 0); @(negedge clk); end
    checks++; if (pulses[1] != 1 || count[1] != 0) begin failures++; $display("FAIL timer1 %0d %0d", pulses[1], count[1]); end
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
