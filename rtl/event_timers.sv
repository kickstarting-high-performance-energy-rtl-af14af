// event_timers: the two event timers of an eNode (Timer0, Timer1).
//
// Each timer is a 32-bit down-counter that software loads (load/load_val).
// While its count is non-zero it decrements by one whenever the event chosen
// by its 3-bit selector occurs; selector 0 turns the timer off. When the count
// steps from 1 to 0 the timer raises its "expired" pulse for one cycle, which
// feeds the Timer0/Timer1 interrupts. Events (events input, one bit each):
// 1 clock cycles, 2 instructions retired, 3 floating-point operations, 4 core
// stall cycles, 5 network packets received; the node decides what drives them.
// Two timers that raise interrupts follow the architecture; the event list and
// the down-counting scheme are choices of this design.
module event_timers #(
  parameter int unsigned NEV = 6
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [NEV-1:0] events,          // bit 0 unused (selector 0 = off)
  input  logic [1:0][2:0] sel,
  input  logic [1:0]      load,
  input  logic [31:0]     load_val,
  output logic [1:0][31:0] count,
  output logic [1:0]      expired
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count   <= '0;
      expired <= '0;
    end else begin
      for (int t = 0; t < 2; t++) begin
        logic tick;
        tick = (sel[t] != 3'd0) && (int'(sel[t]) < NEV) && events[sel[t]];
        expired[t] <= 1'b0;
        if (load[t]) count[t] <= load_val;
        else if (tick && count[t] != '0) begin
          count[t] <= count[t] - 32'd1;
          if (count[t] == 32'd1) expired[t] <= 1'b1;
        end
      end
    end
  end
endmodule
