// rr_arbiter: round-robin arbiter over N requesters.
//
// gnt is one-hot (or zero) and combinational from req: the first requester at
// or after the priority pointer wins. When advance is high the pointer moves to
// the requester after the winner, so a winner has the lowest priority in the
// next round and every requester is served within N grants.
module rr_arbiter #(
  parameter int unsigned N = 5
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  localparam int unsigned W = (N > 1) ? $clog2(N) : 1;
  logic [W-1:0] ptr_q;
  logic [W-1:0] win;

  always_comb begin
    gnt = '0;
    win = '0;
    for (int k = N - 1; k >= 0; k--) begin
      int unsigned idx;
      idx = (int'(ptr_q) + k) % N;
      if (req[idx]) begin
        gnt = '0;
        gnt[idx] = 1'b1;
        win = W'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                ptr_q <= '0;
    else if (advance && |req)  ptr_q <= (int'(win) == N - 1) ? '0 : win + W'(1);
  end
endmodule
