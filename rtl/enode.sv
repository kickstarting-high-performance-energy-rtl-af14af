// enode: one processor/mesh node of the Epiphany array.
//
// It joins an eCore, the four-bank local memory, the DMA engine, the two event
// timers and the network interface, and the three routers of the node, one
// for each eMesh network: cMesh (on-chip writes), rMesh (read requests) and
// xMesh (off-chip writes). The local memory's four ports serve, in this
// order of priority, instruction fetch, core loads/stores, the network
// interface and the DMA engine. The core programs the DMA channels, the
// timers and the multicast register through its special registers
// (MOVTS/MOVFS). Interrupts come from the timers, the DMA channels and the
// chip-wide SYNC, WAND and user lines.
//
// Ports: per mesh (index 0 cMesh, 1 rMesh, 2 xMesh) and per side (0 north,
// 1 east, 2 south, 3 west) a valid/pkt/wait link in each direction. ROW/COL
// are the node's global mesh coordinates. The node contents and the three
// meshes follow the architecture; how they are wired inside (port priorities,
// special-register access, event sources) is this design's.
module enode
  import epiphany_pkg::*;
#(
  parameter logic [ROW_W-1:0] ROW       = 6'd32,
  parameter logic [COL_W-1:0] COL       = 6'd8,
  parameter logic [ROW_W-1:0] CHIP_ROW0 = 6'd32,
  parameter logic [COL_W-1:0] CHIP_COL0 = 6'd8,
  parameter int unsigned      ROWS      = 8,
  parameter int unsigned      COLS      = 8,
  parameter int unsigned      MEM_BYTES = 32768
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic       [2:0][3:0] in_valid,
  input  emesh_pkt_t [2:0][3:0] in_pkt,
  output logic       [2:0][3:0] in_wait,
  output logic       [2:0][3:0] out_valid,
  output emesh_pkt_t [2:0][3:0] out_pkt,
  input  logic       [2:0][3:0] out_wait,
  // chip-level lines
  input  logic                  sync_irq,
  input  logic                  wand_irq,
  input  logic                  user_irq,
  output logic                  sync_out,
  output logic                  wand_out,
  output logic                  mbkpt_out,
  output logic                  halted,
  output logic                  idle
);
  localparam int unsigned MEM_AW = $clog2(MEM_BYTES);

  // ---------------- local memory ----------------
  logic [3:0]             m_req, m_we, m_gnt, m_rvalid;
  logic [3:0][MEM_AW-1:0] m_addr;
  logic [3:0][7:0]        m_be;
  logic [3:0][63:0]       m_wdata, m_rdata;
  local_memory #(.MEM_BYTES(MEM_BYTES)) u_mem (
    .clk, .rst_n, .req(m_req), .we(m_we), .addr(m_addr), .be(m_be), .wdata(m_wdata),
    .gnt(m_gnt), .rvalid(m_rvalid), .rdata(m_rdata)
  );

  // ---------------- eCore ----------------
  logic        if_req, d_req, d_we;
  logic [31:0] if_addr, d_addr;
  logic [7:0]  d_be;
  logic [63:0] d_wdata;
  logic        ni_valid, ni_write, ni_mcast, ni_ready, ni_rvalid;
  size_e       ni_size;
  logic [31:0] ni_addr;
  logic [63:0] ni_wdata, ni_rdata;
  logic        sr_we;
  logic [5:0]  sr_addr;
  logic [31:0] sr_wd, sr_rd, config_q;
  logic [NUM_IRQ-1:0] irq, ilat_ext;
  logic        trap, ev_retire, ev_fpu, ev_stall, pkt_in;
  logic [1:0]  dma_done, tmr_exp;

  always_comb begin
    irq = '0;
    irq[IRQ_SYNC]   = sync_irq;
    irq[IRQ_TIMER0] = tmr_exp[0];
    irq[IRQ_TIMER1] = tmr_exp[1];
    irq[IRQ_DMA0]   = dma_done[0];
    irq[IRQ_DMA1]   = dma_done[1];
    irq[IRQ_WAND]   = wand_irq;
    irq[IRQ_USER]   = user_irq;
  end

  ecore #(.COREID({ROW, COL}), .MEM_BYTES(MEM_BYTES)) u_core (
    .clk, .rst_n,
    .if_req, .if_addr, .if_gnt(m_gnt[0]), .if_rvalid(m_rvalid[0]), .if_rdata(m_rdata[0]),
    .d_req, .d_we, .d_addr, .d_be, .d_wdata, .d_gnt(m_gnt[1]), .d_rvalid(m_rvalid[1]),
    .d_rdata(m_rdata[1]),
    .ni_valid, .ni_write, .ni_mcast, .ni_size, .ni_addr, .ni_wdata, .ni_ready, .ni_rvalid, .ni_rdata,
    .sr_we, .sr_addr, .sr_wd, .sr_rd, .config_q,
    .irq, .ilat_ext, .wand_out, .sync_out, .mbkpt_out, .halted, .trap, .idle,
    .ev_retire, .ev_fpu, .ev_stall
  );

  assign m_req[0] = if_req;   assign m_we[0] = 1'b0;
  assign m_addr[0] = if_addr[MEM_AW-1:0];  assign m_be[0] = '0;  assign m_wdata[0] = '0;
  assign m_req[1] = d_req;    assign m_we[1] = d_we;
  assign m_addr[1] = d_addr[MEM_AW-1:0];   assign m_be[1] = d_be; assign m_wdata[1] = d_wdata;

  // ---------------- node special registers ----------------
  logic [1:0][31:0] tmr_count;
  logic [1:0][15:0] dma_left;
  logic [ROW_W+COL_W-1:0] mcast_q;
  logic             dma_busy;
  always_comb begin
    unique case (sreg_e'(sr_addr))
      SR_TIMER0:    sr_rd = tmr_count[0];
      SR_TIMER1:    sr_rd = tmr_count[1];
      SR_MULTICAST: sr_rd = 32'(mcast_q);
      SR_DMA0CNT:   sr_rd = {dma_busy, 15'd0, dma_left[0]};
      SR_DMA1CNT:   sr_rd = {dma_busy, 15'd0, dma_left[1]};
      default:      sr_rd = '0;
    endcase
  end
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mcast_q <= '0;
    else if (sr_we && sr_addr == 6'(SR_MULTICAST)) mcast_q <= sr_wd[ROW_W+COL_W-1:0];

  // ---------------- event timers ----------------
  event_timers u_tmr (
    .clk, .rst_n,
    .events({pkt_in, ev_stall, ev_fpu, ev_retire, 1'b1, 1'b0}),
    .sel({config_q[10:8], config_q[6:4]}),
    .load({sr_we && sr_addr == 6'(SR_TIMER1), sr_we && sr_addr == 6'(SR_TIMER0)}),
    .load_val(sr_wd), .count(tmr_count), .expired(tmr_exp)
  );

  // ---------------- DMA ----------------
  logic        dma_valid, dma_ready;
  logic [31:0] dma_addr;
  logic [63:0] dma_data;
  dma_engine #(.MEM_AW(MEM_AW)) u_dma (
    .clk, .rst_n,
    .cfg_src_we({sr_we && sr_addr == 6'(SR_DMA1SRC), sr_we && sr_addr == 6'(SR_DMA0SRC)}),
    .cfg_dst_we({sr_we && sr_addr == 6'(SR_DMA1DST), sr_we && sr_addr == 6'(SR_DMA0DST)}),
    .cfg_cnt_we({sr_we && sr_addr == 6'(SR_DMA1CNT), sr_we && sr_addr == 6'(SR_DMA0CNT)}),
    .cfg_wd(sr_wd), .remaining(dma_left), .busy(dma_busy), .done(dma_done),
    .mem_req(m_req[3]), .mem_addr(m_addr[3]), .mem_gnt(m_gnt[3]), .mem_rvalid(m_rvalid[3]),
    .mem_rdata(m_rdata[3]),
    .out_valid(dma_valid), .out_addr(dma_addr), .out_data(dma_data), .out_ready(dma_ready)
  );
  assign m_we[3] = 1'b0;  assign m_be[3] = '0;  assign m_wdata[3] = '0;

  // ---------------- network interface and routers ----------------
  logic       [2:0] tx_valid, tx_wait, rx_valid, rx_wait;
  emesh_pkt_t [2:0] tx_pkt, rx_pkt;
  network_interface #(
    .ROW(ROW), .COL(COL), .CHIP_ROW0(CHIP_ROW0), .CHIP_COL0(CHIP_COL0),
    .ROWS(ROWS), .COLS(COLS), .MEM_AW(MEM_AW)
  ) u_ni (
    .clk, .rst_n,
    .core_valid(ni_valid), .core_write(ni_write), .core_mcast(ni_mcast), .core_size(ni_size),
    .core_addr(ni_addr), .core_wdata(ni_wdata), .core_ready(ni_ready),
    .core_rvalid(ni_rvalid), .core_rdata(ni_rdata),
    .dma_valid, .dma_addr, .dma_data, .dma_ready,
    .mem_req(m_req[2]), .mem_we(m_we[2]), .mem_addr(m_addr[2]), .mem_be(m_be[2]),
    .mem_wdata(m_wdata[2]), .mem_gnt(m_gnt[2]), .mem_rvalid(m_rvalid[2]), .mem_rdata(m_rdata[2]),
    .tx_valid, .tx_pkt, .tx_wait, .rx_valid, .rx_pkt, .rx_wait, .pkt_in, .ilat_set(ilat_ext)
  );

  for (genvar m = 0; m < 3; m++) begin : g_mesh
    logic       [4:0] r_in_valid, r_in_wait, r_out_valid, r_out_wait;
    emesh_pkt_t [4:0] r_in_pkt, r_out_pkt;
    assign r_in_valid = {tx_valid[m], in_valid[m]};
    assign r_in_pkt   = {tx_pkt[m], in_pkt[m]};
    assign r_out_wait = {rx_wait[m], out_wait[m]};
    assign in_wait[m]   = r_in_wait[3:0];
    assign tx_wait[m]   = r_in_wait[4];
    assign out_valid[m] = r_out_valid[3:0];
    assign out_pkt[m]   = r_out_pkt[3:0];
    assign rx_valid[m]  = r_out_valid[4];
    assign rx_pkt[m]    = r_out_pkt[4];
    emesh_router #(.ROW(ROW), .COL(COL)) u_router (
      .clk, .rst_n, .mcast_id(mcast_q),
      .in_valid(r_in_valid), .in_pkt(r_in_pkt), .in_wait(r_in_wait),
      .out_valid(r_out_valid), .out_pkt(r_out_pkt), .out_wait(r_out_wait)
    );
  end

  logic unused;
  assign unused = ^{trap, d_addr[31:MEM_AW], if_addr[31:MEM_AW]};
endmodule
