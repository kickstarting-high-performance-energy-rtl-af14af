// mem_bank: one 64-bit-wide single-port scratchpad SRAM bank with byte
// write enables. A read returns its data in the cycle after the request;
// a write updates the selected bytes at the clock edge. Written as an
// array so that synthesis maps it to an SRAM macro.
module mem_bank #(
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  logic [7:0]               be,
  input  logic [63:0]              wdata,
  output logic [63:0]              rdata
);
  logic [63:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < 8; b++)
          if (be[b]) mem[addr][8*b +: 8] <= wdata[8*b +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
