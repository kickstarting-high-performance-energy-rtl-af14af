// local_memory: the multi-banked scratchpad of one eNode.
//
// The node's memory is split into four banks, each 8 bytes wide (MemBank0..3).
// Four requesters share them: port 0 instruction fetch, port 1 the core's
// load/store unit, port 2 the network interface, port 3 the DMA engine. Every
// bank serves one request per cycle, so up to four 64-bit accesses proceed in
// the same cycle when they fall in different banks. Banks are contiguous
// (bank = address bits just above the bank's own index bits), so code in one
// bank and data in others never collide. On a conflict the lower port number
// wins (fetch first); a losing port keeps its request up until gnt.
//
// Interface per port: req, we, addr (byte address, doubleword aligned use),
// be (byte enables), wdata; gnt in the same cycle; rvalid and rdata one cycle
// after a granted read. The four banks, their width and the four kinds of
// traffic follow the architecture; the contiguous bank mapping and the fixed
// priority are choices of this design.
module local_memory #(
  parameter int unsigned MEM_BYTES = 32768,
  parameter int unsigned NBANKS    = 4
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic [3:0]                     req,
  input  logic [3:0]                     we,
  input  logic [3:0][$clog2(MEM_BYTES)-1:0] addr,
  input  logic [3:0][7:0]                be,
  input  logic [3:0][63:0]               wdata,
  output logic [3:0]                     gnt,
  output logic [3:0]                     rvalid,
  output logic [3:0][63:0]               rdata
);
  localparam int unsigned AW    = $clog2(MEM_BYTES);
  localparam int unsigned BW    = $clog2(NBANKS);
  localparam int unsigned WORDS = MEM_BYTES / (8 * NBANKS);
  localparam int unsigned WW    = $clog2(WORDS);

  logic [3:0][BW-1:0] bank_of;
  logic [NBANKS-1:0][3:0] bank_gnt;      // [bank][port]
  logic [NBANKS-1:0]      b_en, b_we;
  logic [NBANKS-1:0][WW-1:0] b_addr;
  logic [NBANKS-1:0][7:0]    b_be;
  logic [NBANKS-1:0][63:0]   b_wdata, b_rdata;
  logic [3:0][BW-1:0] rbank_q;

  always_comb begin
    for (int p = 0; p < 4; p++) bank_of[p] = addr[p][AW-1 -: BW];
    gnt = '0;
    for (int b = 0; b < NBANKS; b++) begin
      bank_gnt[b] = '0;
      b_en[b] = 1'b0; b_we[b] = 1'b0; b_addr[b] = '0; b_be[b] = '0; b_wdata[b] = '0;
      for (int p = 3; p >= 0; p--)
        if (req[p] && bank_of[p] == BW'(b)) begin
          bank_gnt[b] = '0;
          bank_gnt[b][p] = 1'b1;
        end
      for (int p = 0; p < 4; p++)
        if (bank_gnt[b][p]) begin
          b_en[b] = 1'b1; b_we[b] = we[p]; b_addr[b] = addr[p][3 +: WW];
          b_be[b] = be[p]; b_wdata[b] = wdata[p];
          gnt[p] = 1'b1;
        end
    end
  end

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    mem_bank #(.WORDS(WORDS)) u_bank (
      .clk, .en(b_en[b]), .we(b_we[b]), .addr(b_addr[b]), .be(b_be[b]),
      .wdata(b_wdata[b]), .rdata(b_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rvalid  <= '0;
      rbank_q <= '0;
    end else begin
      for (int p = 0; p < 4; p++) begin
        rvalid[p]  <= gnt[p] && !we[p];
        rbank_q[p] <= bank_of[p];
      end
    end
  end

  always_comb
    for (int p = 0; p < 4; p++) rdata[p] = b_rdata[rbank_q[p]];

endmodule
