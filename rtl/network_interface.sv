// network_interface: the eNode's gateway to its three eMesh routers.
//
// Outgoing: a remote store of the core or a DMA doubleword becomes a write
// packet, sent on the cMesh when the destination lies on this chip (or the
// write is a multicast) and on the xMesh otherwise. A remote load of the core
// becomes a read request on the rMesh carrying the return address
// {this node, RETURN_SLOT}. Answers to read requests go out first, then core
// traffic, then DMA traffic.
// Incoming: write packets from the cMesh (first) and xMesh are written into
// local memory through the node's network memory port, except a write to the
// return slot, which is the answer of this core's pending remote load and is
// handed straight to the core. An incoming read request (rMesh) reads local
// memory and sends the doubleword back as a write to the request's return
// address; one request is handled at a time.
//
// Handshakes: valid/ready towards the core and DMA; valid/wait towards the
// routers (a packet moves in a cycle with valid high and wait low); memory
// port req/gnt with read data one cycle later. Splitting traffic over the
// three meshes and answering reads with writes follow the architecture; the
// return-slot mechanism and the priorities are choices of this design.
module network_interface
  import epiphany_pkg::*;
#(
  parameter logic [ROW_W-1:0] ROW       = '0,   // global coordinates of this node
  parameter logic [COL_W-1:0] COL       = '0,
  parameter logic [ROW_W-1:0] CHIP_ROW0 = '0,   // first row/column of this chip
  parameter logic [COL_W-1:0] CHIP_COL0 = '0,
  parameter int unsigned      ROWS      = 8,
  parameter int unsigned      COLS      = 8,
  parameter int unsigned      MEM_AW    = 15
) (
  input  logic              clk,
  input  logic              rst_n,
  // core remote access
  input  logic              core_valid,
  input  logic              core_write,
  input  logic              core_mcast,
  input  size_e             core_size,
  input  logic [31:0]       core_addr,
  input  logic [63:0]       core_wdata,
  output logic              core_ready,
  output logic              core_rvalid,
  output logic [63:0]       core_rdata,
  // DMA writes
  input  logic              dma_valid,
  input  logic [31:0]       dma_addr,
  input  logic [63:0]       dma_data,
  output logic              dma_ready,
  // local memory port
  output logic              mem_req,
  output logic              mem_we,
  output logic [MEM_AW-1:0] mem_addr,
  output logic [7:0]        mem_be,
  output logic [63:0]       mem_wdata,
  input  logic              mem_gnt,
  input  logic              mem_rvalid,
  input  logic [63:0]       mem_rdata,
  // routers: index 0 cMesh, 1 rMesh, 2 xMesh
  output logic       [2:0]  tx_valid,
  output emesh_pkt_t [2:0]  tx_pkt,
  input  logic       [2:0]  tx_wait,
  input  logic       [2:0]  rx_valid,
  input  emesh_pkt_t [2:0]  rx_pkt,
  output logic       [2:0]  rx_wait,
  output logic              pkt_in,      // a packet was taken from a router (event)
  output logic [NUM_IRQ-1:0] ilat_set    // remote write to ILATST_SLOT
);
  localparam int unsigned C = 0, R = 1, X = 2;

  function automatic logic on_chip(logic [31:0] a);
    return (32'(addr_row(a)) >= 32'(CHIP_ROW0)) && (32'(addr_row(a)) < 32'(CHIP_ROW0) + ROWS) &&
           (32'(addr_col(a)) >= 32'(CHIP_COL0)) && (32'(addr_col(a)) < 32'(CHIP_COL0) + COLS);
  endfunction

  // ---------------- read-request service ----------------
  typedef enum logic [1:0] {RD_IDLE, RD_MEM, RD_WAIT, RD_SEND} rd_state_e;
  rd_state_e  rd_state_q;
  emesh_pkt_t rd_req_q;
  emesh_pkt_t reply_q;
  logic       reply_go;

  // ---------------- incoming writes ----------------
  logic       wr_sel_x;      // which mesh the incoming write comes from
  logic       wr_valid;
  emesh_pkt_t wr_pkt;
  logic       wr_is_ret;
  logic       wr_take;
  always_comb begin
    wr_sel_x  = !rx_valid[C] && rx_valid[X];
    wr_valid  = rx_valid[C] || rx_valid[X];
    wr_pkt    = wr_sel_x ? rx_pkt[X] : rx_pkt[C];
    wr_is_ret = wr_pkt.addr[LOCAL_W-1:0] == RETURN_SLOT ||
                wr_pkt.addr[LOCAL_W-1:0] == ILATST_SLOT;
  end

  // memory port: a pending read request first, then incoming writes
  always_comb begin
    mem_req   = 1'b0;
    mem_we    = 1'b0;
    mem_addr  = '0;
    mem_be    = '0;
    mem_wdata = '0;
    if (rd_state_q == RD_MEM) begin
      mem_req  = 1'b1;
      mem_addr = rd_req_q.addr[MEM_AW-1:0];
    end else if (wr_valid && !wr_is_ret) begin
      mem_req   = 1'b1;
      mem_we    = 1'b1;
      mem_addr  = wr_pkt.addr[MEM_AW-1:0];
      mem_be    = byte_en(wr_pkt.size, wr_pkt.addr[2:0]);
      mem_wdata = wr_pkt.data;
    end
  end

  assign wr_take     = wr_valid && (wr_is_ret || (rd_state_q != RD_MEM && mem_gnt));
  assign core_rvalid = wr_take && wr_is_ret && wr_pkt.addr[LOCAL_W-1:0] == RETURN_SLOT;
  assign ilat_set    = (wr_take && wr_pkt.addr[LOCAL_W-1:0] == ILATST_SLOT) ?
                       wr_pkt.data[NUM_IRQ-1:0] : '0;
  assign core_rdata  = wr_pkt.data;
  always_comb begin
    rx_wait    = 3'b000;
    rx_wait[C] = !(wr_take && !wr_sel_x);
    rx_wait[X] = !(wr_take && wr_sel_x);
    rx_wait[R] = rd_state_q != RD_IDLE;
  end
  assign pkt_in = wr_take || (rx_valid[R] && !rx_wait[R]);

  // ---------------- outgoing packets ----------------
  emesh_pkt_t core_pkt, dma_pkt;
  logic [1:0] core_mesh, dma_mesh, reply_mesh;
  always_comb begin
    core_pkt = '{mcast: core_mcast && core_write, write: core_write, size: core_size,
                 addr: core_addr,
                 data: core_write ? core_wdata : {32'd0, ROW, COL, RETURN_SLOT}};
    core_mesh = !core_write ? 2'(R) : (core_mcast || on_chip(core_addr)) ? 2'(C) : 2'(X);
    dma_pkt   = '{mcast: 1'b0, write: 1'b1, size: SZ_DBL, addr: dma_addr, data: dma_data};
    dma_mesh  = on_chip(dma_addr) ? 2'(C) : 2'(X);
    reply_mesh = on_chip(reply_q.addr) ? 2'(C) : 2'(X);
  end

  always_comb begin
    tx_valid   = '0;
    tx_pkt     = '0;
    reply_go   = 1'b0;
    core_ready = 1'b0;
    dma_ready  = 1'b0;
    if (rd_state_q == RD_SEND) begin
      tx_valid[reply_mesh] = 1'b1;
      tx_pkt[reply_mesh]   = reply_q;
      reply_go             = !tx_wait[reply_mesh];
    end
    if (core_valid && !tx_valid[core_mesh]) begin
      tx_valid[core_mesh] = 1'b1;
      tx_pkt[core_mesh]   = core_pkt;
      core_ready          = !tx_wait[core_mesh];
    end
    if (dma_valid && !tx_valid[dma_mesh]) begin
      tx_valid[dma_mesh] = 1'b1;
      tx_pkt[dma_mesh]   = dma_pkt;
      dma_ready          = !tx_wait[dma_mesh];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_state_q <= RD_IDLE;
      rd_req_q   <= '0;
      reply_q    <= '0;
    end else begin
      unique case (rd_state_q)
        RD_IDLE: if (rx_valid[R]) begin
          rd_req_q   <= rx_pkt[R];
          rd_state_q <= RD_MEM;
        end
        RD_MEM:  if (mem_gnt) rd_state_q <= RD_WAIT;
        RD_WAIT: if (mem_rvalid) begin
          reply_q    <= '{mcast: 1'b0, write: 1'b1, size: rd_req_q.size,
                          addr: rd_req_q.data[31:0], data: mem_rdata};
          rd_state_q <= RD_SEND;
        end
        default: if (reply_go) rd_state_q <= RD_IDLE;
      endcase
    end
  end

`ifndef SYNTHESIS
  a_rx_r_read: assert property (@(posedge clk) disable iff (!rst_n)
    rx_valid[R] |-> !rx_pkt[R].write);
`endif
endmodule
