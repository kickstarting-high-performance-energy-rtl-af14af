// tb_network_interface: network interface of node (33,9) on a chip at
// (32,8) of 8x8 nodes, with a model local memory port. Checks that core and
// DMA writes go to the cMesh on-chip and the xMesh off-chip, that a remote
// load becomes an rMesh read request carrying the return slot and completes
// when the answer arrives, that incoming writes reach memory with the right
// byte enables, that an incoming read request is answered with the memory
// data at the return address, that tx push-back holds packets, and that a
// write to the ILATST slot sets interrupt-latch bits.
module tb_network_interface;
  import epiphany_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic core_valid = 0, core_write = 0, core_mcast = 0, core_ready, core_rvalid;
  size_e core_size = SZ_WORD;
  logic [31:0] core_addr = 0, dma_addr = 0;
  logic [63:0] core_wdata = 0, core_rdata, dma_data = 0;
  logic dma_valid = 0, dma_ready;
  logic mem_req, mem_we, mem_gnt, mem_rvalid, pkt_in;
  logic [14:0] mem_addr;
  logic [7:0] mem_be;
  logic [63:0] mem_wdata, mem_rdata;
  logic [2:0] tx_valid, tx_wait = 0, rx_valid = 0, rx_wait;
  emesh_pkt_t [2:0] tx_pkt, rx_pkt;
  logic [9:0] ilat_set;
  network_interface #(.ROW(6'd33), .COL(6'd9), .CHIP_ROW0(6'd32), .CHIP_COL0(6'd8)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // memory model
  logic [63:0] mem [4096];
  always @(negedge clk) mem_gnt = 1'($urandom);
  always @(posedge clk) begin
    mem_rvalid <= mem_req && mem_gnt && !mem_we;
    if (mem_req && mem_gnt && !mem_we) mem_rdata <= mem[mem_addr[14:3]];
    if (mem_req && mem_gnt && mem_we)
      for (int b = 0; b < 8; b++) if (mem_be[b]) mem[mem_addr[14:3]][8*b +: 8] <= mem_wdata[8*b +: 8];
  end

  task automatic core_req(logic wr, logic [31:0] a, logic [63:0] d, int exp_mesh);
    @(negedge clk);
    core_valid = 1; core_write = wr; core_addr = a; core_wdata = d;
    tx_wait = 3'b111;                      // push back first
    @(negedge clk);
    chk(!core_ready && tx_valid[exp_mesh], "held under push-back");
    tx_wait = 0;
    #1;
    chk(core_ready && tx_valid == (3'b001 << exp_mesh) && tx_pkt[exp_mesh].addr == a &&
        tx_pkt[exp_mesh].write == wr, $sformatf("core request to mesh %0d", exp_mesh));
    if (wr) chk(tx_pkt[exp_mesh].data == d, "write data");
    else chk(tx_pkt[exp_mesh].data[31:0] == {6'd33, 6'd9, RETURN_SLOT}, "return address");
    @(negedge clk); core_valid = 0;
  endtask

  task automatic rx(int m, emesh_pkt_t p);
    @(negedge clk);
    rx_valid[m] = 1; rx_pkt[m] = p;
    do @(posedge clk); while (rx_wait[m]);
    #1 rx_valid[m] = 0;
  endtask

  initial begin
    emesh_pkt_t p;
    for (int k = 0; k < 4096; k++) mem[k] = {32'(k), 32'hA5A50000 | 32'(k)};
    rx_pkt = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    core_req(1, 32'h88912340, 64'h1122334455667788, 0);   // on-chip write -> cMesh
    core_req(1, 32'h8E000010, 64'h99, 2);                 // off-chip write -> xMesh
    core_req(0, 32'h88C00008, 64'h0, 1);                  // read -> rMesh
    // the answer arrives on the cMesh
    p = '{mcast: 0, write: 1, size: SZ_WORD, addr: {6'd33, 6'd9, RETURN_SLOT}, data: 64'hDEADBEEF};
    fork
      rx(0, p);
      begin
        @(posedge clk iff core_rvalid);
        chk(core_rdata == 64'hDEADBEEF, "read answer to core");
      end
    join
    // incoming byte write to memory
    p = '{mcast: 0, write: 1, size: SZ_BYTE, addr: {12'h849, 20'h00012}, data: 64'h00000000_00EE0000};
    rx(2, p);
    repeat (3) @(posedge clk);
    chk(mem[2] == {32'd2, 32'hA5EE0002}, "byte write into memory");
    // incoming read request -> answer to an off-chip return address on the xMesh
    p = '{mcast: 0, write: 0, size: SZ_DBL, addr: {12'h849, 20'h00100}, data: 64'h8E000200};
    fork
      rx(1, p);
      begin
        @(posedge clk iff tx_valid[2]);
        chk(tx_pkt[2].write && tx_pkt[2].addr == 32'h8E000200 &&
            tx_pkt[2].data == {32'd32, 32'hA5A50020}, "read request answered");
      end
    join
    @(negedge clk);
    // DMA write off-chip and on-chip
    dma_valid = 1; dma_addr = 32'h80900000; dma_data = 64'h5; #1;
    chk(dma_ready && tx_valid == 3'b001, "dma on-chip");
    dma_addr = 32'hC0000000; #1;
    chk(dma_ready && tx_valid == 3'b100, "dma off-chip");
    @(negedge clk); dma_valid = 0;
    // ILATST
    p = '{mcast: 0, write: 1, size: SZ_WORD, addr: {12'h849, ILATST_SLOT}, data: 64'h1};
    @(negedge clk); rx_valid[0] = 1; rx_pkt[0] = p; #1;
    chk(ilat_set == 10'h1 && !rx_wait[0], "ilatst");
    @(negedge clk); rx_valid[0] = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
