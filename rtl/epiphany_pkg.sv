// epiphany_pkg: types and constants shared by the Epiphany manycore RTL.
//
// Global addresses are 32 bits: mesh row in [31:26], mesh column in [25:20]
// and a 20-bit offset local to that node in [19:0] (the address map of the
// architecture). One eMesh packet moves 64 bits of data and a 32-bit address,
// as the architecture specifies for a write link; a few control bits (multicast,
// write or read, access size) ride along. A read request puts the 32-bit return
// address in data[31:0]. Sub-doubleword data always travels in the byte lanes
// that match addr[2:0]. The control bits, the size codes, the special register
// numbers and the interrupt numbering below are choices of this design.
package epiphany_pkg;

  localparam int unsigned ADDR_W   = 32;
  localparam int unsigned DATA_W   = 64;
  localparam int unsigned ROW_W    = 6;
  localparam int unsigned COL_W    = 6;
  localparam int unsigned LOCAL_W  = 20;
  localparam int unsigned NUM_IRQ  = 10;

  // Local offset that catches the answer of a remote read (the read-return slot).
  localparam logic [LOCAL_W-1:0] RETURN_SLOT = 20'hFFFF8;
  // Local offset whose write sets interrupt-latch bits of the node's core
  // (how a host or another core starts a core that idles after reset).
  localparam logic [LOCAL_W-1:0] ILATST_SLOT = 20'hF0428;

  typedef enum logic [1:0] {
    SZ_BYTE = 2'd0,
    SZ_HALF = 2'd1,
    SZ_WORD = 2'd2,
    SZ_DBL  = 2'd3
  } size_e;

  typedef struct packed {
    logic        mcast;   // 1: multicast write, routed radially outwards
    logic        write;   // 1: write transaction, 0: read request
    size_e       size;
    logic [31:0] addr;    // destination address
    logic [63:0] data;    // write data, or return address in [31:0] for reads
  } emesh_pkt_t;

  // Router ports.
  typedef enum logic [2:0] {
    DIR_N = 3'd0,
    DIR_E = 3'd1,
    DIR_S = 3'd2,
    DIR_W = 3'd3,
    DIR_L = 3'd4
  } dir_e;

  // Interrupt numbers; 0 has the highest priority.
  typedef enum logic [3:0] {
    IRQ_SYNC    = 4'd0,
    IRQ_SWEXC   = 4'd1,
    IRQ_MEMFLT  = 4'd2,
    IRQ_TIMER0  = 4'd3,
    IRQ_TIMER1  = 4'd4,
    IRQ_MESSAGE = 4'd5,
    IRQ_DMA0    = 4'd6,
    IRQ_DMA1    = 4'd7,
    IRQ_WAND    = 4'd8,
    IRQ_USER    = 4'd9
  } irq_e;

  // Special (MOVTS/MOVFS) registers of a node.
  typedef enum logic [5:0] {
    SR_CONFIG   = 6'd0,   // [0]: rounding 0=nearest-even 1=truncate; [7:4] timer0 event, [11:8] timer1 event
    SR_STATUS   = 6'd1,   // flags, see ecore
    SR_PC       = 6'd2,
    SR_IRET     = 6'd3,
    SR_IMASK    = 6'd4,
    SR_ILAT     = 6'd5,   // write: set bits, read: latched interrupts
    SR_ILATCL   = 6'd6,   // write: clear bits
    SR_IPEND    = 6'd7,
    SR_TIMER0   = 6'd8,
    SR_TIMER1   = 6'd9,
    SR_COREID   = 6'd10,
    SR_MULTICAST= 6'd11,
    SR_DMA0SRC  = 6'd16,
    SR_DMA0DST  = 6'd17,
    SR_DMA0CNT  = 6'd18,  // write starts channel 0; read: remaining doublewords
    SR_DMA1SRC  = 6'd20,
    SR_DMA1DST  = 6'd21,
    SR_DMA1CNT  = 6'd22
  } sreg_e;

  function automatic logic [ROW_W-1:0] addr_row(logic [31:0] a);
    return a[31:26];
  endfunction
  function automatic logic [COL_W-1:0] addr_col(logic [31:0] a);
    return a[25:20];
  endfunction

  // Byte enables of an access of the given size at byte offset a[2:0].
  function automatic logic [7:0] byte_en(size_e s, logic [2:0] a);
    unique case (s)
      SZ_BYTE: return 8'h01 << a;
      SZ_HALF: return 8'h03 << {a[2:1], 1'b0};
      SZ_WORD: return 8'h0F << {a[2], 2'b00};
      default: return 8'hFF;
    endcase
  endfunction

endpackage
