// interrupt_controller: prioritized, nested interrupt logic of one eCore.
//
// Ten interrupt lines, number 0 the highest priority (numbering in
// epiphany_pkg::irq_e). A rising request is latched in ILAT. An interrupt is
// taken when its ILAT bit is set, its IMASK bit is clear, interrupts are not
// globally disabled (GID) and no interrupt of equal or higher priority is in
// service (IPEND); that is how a higher-priority interrupt nests inside a
// lower one. The core asks with take_ok when it is between instructions; then
// take is high for one cycle with the vector number, the ILAT bit moves to
// IPEND and the core jumps to the vector-table entry at local address 4*num.
// rti clears the highest-priority IPEND bit. Software writes IMASK, sets ILAT
// bits (ilat_set) or clears them (ilat_clr). The ten interrupts, priorities,
// masking and the local vector table follow the architecture; the 4-byte
// vector spacing and the ILAT/IPEND register scheme are this design's.
module interrupt_controller
  import epiphany_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NUM_IRQ-1:0] irq,        // level or pulse requests
  input  logic               gid,        // global interrupt disable
  input  logic               take_ok,
  output logic               take,
  output logic [3:0]         take_num,
  input  logic               rti,
  input  logic               imask_we,
  input  logic [NUM_IRQ-1:0] imask_wd,
  input  logic [NUM_IRQ-1:0] ilat_set,
  input  logic [NUM_IRQ-1:0] ilat_clr,
  output logic [NUM_IRQ-1:0] imask,
  output logic [NUM_IRQ-1:0] ilat,
  output logic [NUM_IRQ-1:0] ipend
);
  logic [NUM_IRQ-1:0] irq_q, cand;
  logic               found;

  always_comb begin
    cand     = ilat & ~imask;
    take_num = '0;
    found    = 1'b0;
    for (int k = NUM_IRQ - 1; k >= 0; k--) begin
      // an interrupt may enter only if nothing of equal or higher priority is in service
      logic blocked;
      blocked = 1'b0;
      for (int j = 0; j <= k; j++) if (ipend[j]) blocked = 1'b1;
      if (cand[k] && !blocked) begin
        take_num = 4'(k);
        found    = 1'b1;
      end
    end
    take = found && take_ok && !gid;
  end

  logic [NUM_IRQ-1:0] top_pend;
  always_comb begin
    top_pend = '0;
    for (int k = NUM_IRQ - 1; k >= 0; k--)
      if (ipend[k]) begin
        top_pend = '0;
        top_pend[k] = 1'b1;
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irq_q <= '0;
      ilat  <= '0;
      imask <= '0;
      ipend <= '0;
    end else begin
      logic [NUM_IRQ-1:0] nl, np;
      irq_q <= irq;
      nl = (ilat | (irq & ~irq_q) | ilat_set) & ~ilat_clr;
      np = ipend;
      if (rti) np = np & ~top_pend;
      if (take) begin
        nl[take_num] = 1'b0;
        np[take_num] = 1'b1;
      end
      ilat  <= nl;
      ipend <= np;
      if (imask_we) imask <= imask_wd;
    end
  end
endmodule
