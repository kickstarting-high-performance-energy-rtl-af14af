// ecore: the 32-bit RISC processor of an eNode.
//
// The core holds the program sequencer, the interrupt handler, the integer
// ALU, the FPU and the 64-word register file. It executes the instruction set
// of ecore_isa_pkg one instruction at a time: fetch (a 64-bit fetch from the
// local memory port, of which the addressed word is used), execute, and,
// for loads, stores and FPU operations, wait for the memory, the network or
// the FPU result. Conditional moves and branches test one of sixteen
// condition codes built from the integer flags AN AZ AV AC and the float
// flags BN BZ. Branch and link writes the return address to R14.
// Addresses whose top 12 bits are zero or equal this core's ID go to local
// memory; all others become network transactions: stores are posted and the
// core moves on once the network interface has taken them, loads wait for
// the answer. Between instructions the core accepts interrupts: it saves the
// PC in IRET and jumps to the vector 4*n; RTI returns and ends the service.
// IDLE sleeps until an interrupt is latched; the core also comes out of
// reset idle, so it runs only once an interrupt (normally SYNC, vector 0) has
// been latched, for instance by a remote write to the node's ILATST slot. BKPT, TRAP and MBKPT halt the
// core (halted/trap outputs, mbkpt also to the chip); SYNC pulses the chip
// sync line; WAND raises wand_out until the WAND interrupt is taken.
//
// What follows the architecture: the 64-register file, the listed
// instructions, the flags and sixteen conditions, IEEE floats with a
// rounding-mode choice, three load/store addressing modes with 64-bit
// transfers, prioritized nested interrupts with a local vector table, and
// strong ordering of local accesses. This design's own choices: the
// encoding, the condition code table, the special registers, and above all
// the sequencing: it is not the paper's 8-stage dual-issue pipeline and has
// no 16-bit instructions (see the README).
module ecore
  import epiphany_pkg::*;
  import ecore_isa_pkg::*;
#(
  parameter logic [11:0] COREID    = 12'h808,
  parameter int unsigned MEM_BYTES = 32768
) (
  input  logic        clk,
  input  logic        rst_n,
  // instruction fetch port
  output logic        if_req,
  output logic [31:0] if_addr,
  input  logic        if_gnt,
  input  logic        if_rvalid,
  input  logic [63:0] if_rdata,
  // data port (local memory)
  output logic        d_req,
  output logic        d_we,
  output logic [31:0] d_addr,
  output logic [7:0]  d_be,
  output logic [63:0] d_wdata,
  input  logic        d_gnt,
  input  logic        d_rvalid,
  input  logic [63:0] d_rdata,
  // remote accesses through the network interface
  output logic        ni_valid,
  output logic        ni_write,
  output logic        ni_mcast,
  output size_e       ni_size,
  output logic [31:0] ni_addr,
  output logic [63:0] ni_wdata,
  input  logic        ni_ready,
  input  logic        ni_rvalid,
  input  logic [63:0] ni_rdata,
  // node special registers (DMA, timers, multicast)
  output logic        sr_we,
  output logic [5:0]  sr_addr,
  output logic [31:0] sr_wd,
  input  logic [31:0] sr_rd,
  output logic [31:0] config_q,
  // interrupts and chip-level lines
  input  logic [NUM_IRQ-1:0] irq,
  input  logic [NUM_IRQ-1:0] ilat_ext,   // latch-set requests from the network
  output logic        wand_out,
  output logic        sync_out,
  output logic        mbkpt_out,
  output logic        halted,
  output logic        trap,
  output logic        idle,
  output logic        ev_retire,
  output logic        ev_fpu,
  output logic        ev_stall
);
  typedef enum logic [3:0] {
    S_FETCH, S_FWAIT, S_EXEC, S_MEM, S_MWAIT, S_RWAIT, S_FPU, S_TSW, S_IDLE, S_HALT
  } state_e;

  state_e      st_q;
  logic [31:0] pc_q, ir_q, iret_q;
  logic        an_q, az_q, av_q, ac_q, bn_q, bz_q, bis_q, bvs_q, bus_q, gid_q;
  logic [31:0] ea_q;

  // decode
  opcode_e     op;
  logic [5:0]  rd, rn, rm;
  logic [31:0] simm14, disp12, off22;
  size_e       lsz;
  assign op     = opcode_e'(ir_q[31:26]);
  assign rd     = ir_q[25:20];
  assign rn     = ir_q[19:14];
  assign rm     = ir_q[13:8];
  assign simm14 = {{18{ir_q[13]}}, ir_q[13:0]};
  assign disp12 = {{20{ir_q[11]}}, ir_q[11:0]};
  assign off22  = {{8{ir_q[21]}}, ir_q[21:0], 2'b00};
  assign lsz    = (op == OP_LDRD || op == OP_STRD) ? size_e'(ir_q[13:12]) :
                  (op == OP_TESTSET) ? SZ_WORD : size_e'(ir_q[1:0]);

  // register file
  logic [31:0] f_a, f_b, f_c, i_a, i_b, i_wd, f_wd;
  logic        i_we, f_we;
  logic [5:0]  i_wa;
  logic [1:0]  ls_we;
  logic [63:0] ls_rd, ls_wd;
  register_file u_rf (
    .clk, .rst_n,
    .f_ra(rn), .f_rb(rm), .f_rc(rd), .f_a, .f_b, .f_c, .f_we, .f_wa(rd), .f_wd,
    .i_ra(rn), .i_rb(rm), .i_a, .i_b, .i_we, .i_wa, .i_wd,
    .ls_ra(rd), .ls_rd, .ls_we, .ls_wa(rd), .ls_wd
  );

  // integer ALU
  logic [3:0]  alu_op;
  logic [31:0] alu_b, alu_y;
  logic        alu_n, alu_z, alu_v, alu_c;
  always_comb begin
    alu_b = i_b;
    unique case (op)
      OP_ADDI: begin alu_op = 4'd0; alu_b = simm14; end
      OP_SUBI: begin alu_op = 4'd1; alu_b = simm14; end
      OP_LSLI: begin alu_op = 4'd2; alu_b = simm14; end
      OP_LSRI: begin alu_op = 4'd3; alu_b = simm14; end
      OP_ASRI: begin alu_op = 4'd4; alu_b = simm14; end
      default: alu_op = 4'(int'(op) - 1);   // OP_ADD..OP_BITR map to 0..8
    endcase
  end
  ialu u_alu (.op(alu_op), .a(i_a), .b(alu_b), .y(alu_y), .an(alu_n), .az(alu_z), .av(alu_v), .ac(alu_c));

  // FPU
  logic        f_start, f_done, f_bn, f_bz, f_inv, f_ovf, f_unf;
  logic [31:0] f_y;
  fpu u_fpu (
    .clk, .rst_n, .start(f_start), .op(3'(int'(op) - 16)), .rm(config_q[0]),
    .a(f_a), .b(f_b), .c(f_c),
    .done(f_done), .y(f_y), .bn(f_bn), .bz(f_bz), .inv(f_inv), .ovf(f_ovf), .unf(f_unf)
  );
  assign f_wd = f_y;
  assign f_we = (st_q == S_FPU) && f_done;

  // condition codes
  function automatic logic cond_ok(logic [3:0] c, logic an, logic az, logic av, logic ac,
                                   logic bn, logic bz);
    unique case (cond_e'(c))
      C_EQ:   return az;
      C_NE:   return !az;
      C_GTU:  return !az && ac;
      C_GTEU: return ac;
      C_LTEU: return az || !ac;
      C_LTU:  return !ac;
      C_GT:   return !az && (av == an);
      C_GTE:  return av == an;
      C_LT:   return av != an;
      C_LTE:  return az || (av != an);
      C_BEQ:  return bz;
      C_BNE:  return !bz;
      C_BLT:  return bn && !bz;
      C_BLTE: return bn || bz;
      default: return 1'b1;
    endcase
  endfunction

  // interrupt controller
  logic              take, rti, imask_we;
  logic [3:0]        take_num;
  logic [NUM_IRQ-1:0] imask, ilat, ipend, ilat_set, ilat_clr, irq_all;
  logic              swexc, memflt;
  assign irq_all = irq | (NUM_IRQ'(swexc) << IRQ_SWEXC) | (NUM_IRQ'(memflt) << IRQ_MEMFLT);
  interrupt_controller u_intc (
    .clk, .rst_n, .irq(irq_all), .gid(gid_q), .take_ok(st_q == S_FETCH), .take, .take_num,
    .rti, .imask_we, .imask_wd(sr_wd[NUM_IRQ-1:0]), .ilat_set, .ilat_clr,
    .imask, .ilat, .ipend
  );

  // effective address and locality
  logic [31:0] ea;
  logic        is_local, ea_oob;
  always_comb begin
    unique case (op)
      OP_LDRD, OP_STRD: ea = i_a + disp12;
      OP_LDRP, OP_STRP: ea = i_a;
      default:          ea = i_a + i_b;   // index mode, TESTSET
    endcase
  end
  assign is_local = (ea_q[31:20] == 12'd0) || (ea_q[31:20] == COREID);
  assign ea_oob   = ea_q[19:0] >= 20'(MEM_BYTES);

  // store data in the byte lanes of the address
  logic [63:0] st_data;
  logic [31:0] rd_val;
  assign rd_val = rd[0] ? ls_rd[63:32] : ls_rd[31:0];
  always_comb begin
    unique case (lsz)
      SZ_BYTE: st_data = {8{rd_val[7:0]}};
      SZ_HALF: st_data = {4{rd_val[15:0]}};
      SZ_WORD: st_data = {2{rd_val}};
      default: st_data = ls_rd;
    endcase
  end

  // load data out of its lanes
  function automatic logic [63:0] ld_extract(logic [63:0] d, size_e s, logic [2:0] a);
    logic [63:0] v;
    v = d >> (8 * a);
    unique case (s)
      SZ_BYTE: return {56'd0, v[7:0]};
      SZ_HALF: return {48'd0, v[15:0]};
      SZ_WORD: return {32'd0, v[31:0]};
      default: return d;
    endcase
  endfunction

  logic is_store, ts_zero;
  assign is_store = (op == OP_STRD || op == OP_STRX || op == OP_STRP);
  assign ts_zero  = (op == OP_TESTSET) && (ld_extract(d_rdata, SZ_WORD, ea_q[2:0]) == 64'd0);

  // memory and network requests
  always_comb begin
    if_req   = (st_q == S_FETCH) && !take;
    if_addr  = {pc_q[31:3], 3'b000};
    d_req    = 1'b0;
    d_we     = 1'b0;
    d_addr   = {12'd0, ea_q[19:3], 3'b000};
    d_be     = byte_en(lsz, ea_q[2:0]);
    d_wdata  = st_data;
    ni_valid = 1'b0;
    ni_write = is_store;
    ni_mcast = config_q[12];
    ni_size  = lsz;
    ni_addr  = ea_q;
    ni_wdata = st_data;
    if (st_q == S_MEM && is_local && !ea_oob) begin
      d_req = 1'b1;
      d_we  = is_store;
    end else if (st_q == S_MEM && !is_local && op != OP_TESTSET) begin
      ni_valid = 1'b1;
    end else if (st_q == S_TSW) begin
      d_req   = 1'b1;
      d_we    = 1'b1;
    end
  end

  // special registers read by MOVFS
  logic [31:0] status_w, sr_val;
  assign status_w = {19'd0, bus_q, bvs_q, bis_q, bn_q, bz_q, av_q, ac_q, an_q, az_q, 2'b00, gid_q, 1'b0};
  always_comb begin
    unique case (sreg_e'(rn))
      SR_CONFIG: sr_val = config_q;
      SR_STATUS: sr_val = status_w;
      SR_PC:     sr_val = pc_q;
      SR_IRET:   sr_val = iret_q;
      SR_IMASK:  sr_val = 32'(imask);
      SR_ILAT:   sr_val = 32'(ilat);
      SR_IPEND:  sr_val = 32'(ipend);
      SR_COREID: sr_val = 32'(COREID);
      default:   sr_val = sr_rd;
    endcase
  end
  assign sr_addr  = (op == OP_MOVFS) ? rn : rd;
  assign sr_wd    = i_a;
  assign sr_we    = (st_q == S_EXEC) && (op == OP_MOVTS) && !(rd inside {6'd0, 6'd1, 6'd2, 6'd3, 6'd4, 6'd5, 6'd6, 6'd7, 6'd10});
  assign imask_we = (st_q == S_EXEC) && (op == OP_MOVTS) && rd == 6'(SR_IMASK);
  assign ilat_set = (((st_q == S_EXEC) && (op == OP_MOVTS) && rd == 6'(SR_ILAT)) ? i_a[NUM_IRQ-1:0] : '0) |
                    ilat_ext;
  assign ilat_clr = ((st_q == S_EXEC) && (op == OP_MOVTS) && rd == 6'(SR_ILATCL)) ? i_a[NUM_IRQ-1:0] : '0;
  assign rti      = (st_q == S_EXEC) && (op == OP_RTI);

  // register writes
  always_comb begin
    i_we  = 1'b0;
    i_wa  = rd;
    i_wd  = alu_y;
    ls_we = 2'b00;
    ls_wd = '0;
    if (st_q == S_EXEC) begin
      unique case (op)
        OP_ADD, OP_SUB, OP_LSL, OP_LSR, OP_ASR, OP_EOR, OP_ORR, OP_AND, OP_BITR,
        OP_ADDI, OP_SUBI, OP_LSLI, OP_LSRI, OP_ASRI: i_we = 1'b1;
        OP_MOVC:  begin i_we = cond_ok(ir_q[3:0], an_q, az_q, av_q, ac_q, bn_q, bz_q); i_wd = i_a; end
        OP_MOVI:  begin i_we = 1'b1; i_wd = {16'd0, ir_q[15:0]}; end
        OP_MOVT:  begin i_we = 1'b1; i_wd = {ir_q[15:0], f_c[15:0]}; end
        OP_MOVFS: begin i_we = 1'b1; i_wd = sr_val; end
        OP_BL, OP_JALR: begin i_we = 1'b1; i_wa = 6'(LR); i_wd = pc_q + 32'd4; end
        default: ;
      endcase
    end else if (st_q == S_MEM && (op == OP_LDRP || op == OP_STRP) &&
                 ((is_local && !ea_oob && d_gnt) || (!is_local && ni_ready))) begin
      i_we = 1'b1;                       // post-modify: rn += rm
      i_wa = rn;
      i_wd = ea_q + i_b;
    end
    if (st_q == S_TSW && d_gnt) begin
      ls_we = 2'b01;                     // TESTSET found zero: rd <= old value 0
    end else if ((st_q == S_MWAIT && d_rvalid && !ts_zero) || (st_q == S_RWAIT && ni_rvalid)) begin
      ls_wd = ld_extract(st_q == S_MWAIT ? d_rdata : ni_rdata, lsz, ea_q[2:0]);
      ls_we = (lsz == SZ_DBL) ? 2'b11 : 2'b01;
    end
  end

  assign f_start   = (st_q == S_EXEC) && op inside {OP_FADD, OP_FSUB, OP_FMUL, OP_FMADD, OP_FMSUB, OP_FIX, OP_FLOAT, OP_FABS};
  assign swexc     = (st_q == S_EXEC) && (op == OP_UNIMPL || int'(op) inside {[58:63], [44:47], [38:39], [30:31], 15});
  assign memflt    = (st_q == S_MEM) && is_local && ea_oob;
  assign halted    = (st_q == S_HALT);
  assign idle      = (st_q == S_IDLE);
  assign ev_retire = (st_q == S_FETCH) && !take && if_gnt && pc_q != '1;
  assign ev_fpu    = f_start;
  assign ev_stall  = (st_q == S_MWAIT) || (st_q == S_RWAIT) || (st_q == S_FPU) ||
                     (st_q == S_MEM && !d_gnt && !ni_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= S_IDLE; pc_q <= '0; ir_q <= '0; iret_q <= '0; ea_q <= '0;
      {an_q, az_q, av_q, ac_q, bn_q, bz_q, bis_q, bvs_q, bus_q, gid_q} <= '0;
      config_q <= '0; wand_out <= 1'b0; sync_out <= 1'b0; mbkpt_out <= 1'b0; trap <= 1'b0;
    end else begin
      sync_out <= 1'b0;
      if (take && take_num == 4'(IRQ_WAND)) wand_out <= 1'b0;
      unique case (st_q)
        S_FETCH: begin
          if (take) begin
            iret_q <= pc_q;
            pc_q   <= {26'd0, take_num, 2'b00};
          end else if (if_gnt) st_q <= S_FWAIT;
        end
        S_FWAIT: if (if_rvalid) begin
          ir_q <= pc_q[2] ? if_rdata[63:32] : if_rdata[31:0];
          st_q <= S_EXEC;
        end
        S_EXEC: begin
          st_q <= S_FETCH;
          pc_q <= pc_q + 32'd4;
          ea_q <= ea;
          unique case (op)
            OP_ADD, OP_SUB, OP_ADDI, OP_SUBI: {an_q, az_q, av_q, ac_q} <= {alu_n, alu_z, alu_v, alu_c};
            OP_LSL, OP_LSR, OP_ASR, OP_EOR, OP_ORR, OP_AND, OP_BITR, OP_LSLI, OP_LSRI, OP_ASRI:
              {an_q, az_q, av_q, ac_q} <= {alu_n, alu_z, 2'b00};
            OP_B:    if (cond_ok(ir_q[25:22], an_q, az_q, av_q, ac_q, bn_q, bz_q)) pc_q <= pc_q + off22;
            OP_BL:   pc_q <= pc_q + off22;
            OP_JR, OP_JALR: pc_q <= i_a;
            OP_RTI:  pc_q <= iret_q;
            OP_GID:  gid_q <= 1'b1;
            OP_GIE:  gid_q <= 1'b0;
            OP_MOVTS: unique case (sreg_e'(rd))
              SR_CONFIG: config_q <= i_a;
              SR_STATUS: {bus_q, bvs_q, bis_q, bn_q, bz_q, av_q, ac_q, an_q, az_q, gid_q} <=
                         {i_a[12:4], i_a[1]};
              SR_IRET:   iret_q <= i_a;
              default: ;
            endcase
            OP_FADD, OP_FSUB, OP_FMUL, OP_FMADD, OP_FMSUB, OP_FIX, OP_FLOAT, OP_FABS: begin
              st_q <= S_FPU;
              pc_q <= pc_q;
            end
            OP_LDRD, OP_STRD, OP_LDRX, OP_STRX, OP_LDRP, OP_STRP, OP_TESTSET: begin
              st_q <= S_MEM;
              pc_q <= pc_q;
            end
            OP_IDLE:  st_q <= S_IDLE;
            OP_TRAP:  begin st_q <= S_HALT; trap <= 1'b1; end
            OP_BKPT:  st_q <= S_HALT;
            OP_MBKPT: begin st_q <= S_HALT; mbkpt_out <= 1'b1; end
            OP_SYNC:  sync_out <= 1'b1;
            OP_WAND:  wand_out <= 1'b1;
            default: ;
          endcase
        end
        S_FPU: if (f_done) begin
          st_q <= S_FETCH;
          pc_q <= pc_q + 32'd4;
          bn_q <= f_bn; bz_q <= f_bz;
          bis_q <= bis_q | f_inv; bvs_q <= bvs_q | f_ovf; bus_q <= bus_q | f_unf;
        end
        S_MEM: begin
          if (is_local && ea_oob) begin
            st_q <= S_FETCH;              // memory fault: skip the access
            pc_q <= pc_q + 32'd4;
          end else if (is_local && d_gnt) begin
            st_q <= is_store ? S_FETCH : S_MWAIT;
            if (is_store) pc_q <= pc_q + 32'd4;
          end else if (!is_local && op == OP_TESTSET) begin
            st_q <= S_FETCH;              // only local TESTSET is supported
            pc_q <= pc_q + 32'd4;
          end else if (!is_local && ni_ready) begin
            st_q <= is_store ? S_FETCH : S_RWAIT;
            if (is_store) pc_q <= pc_q + 32'd4;
          end
        end
        S_MWAIT: if (d_rvalid) begin
          if (ts_zero) st_q <= S_TSW;
          else begin
            st_q <= S_FETCH;
            pc_q <= pc_q + 32'd4;
          end
        end
        S_TSW: if (d_gnt) begin
          st_q <= S_FETCH;
          pc_q <= pc_q + 32'd4;
        end
        S_RWAIT: if (ni_rvalid) begin
          st_q <= S_FETCH;
          pc_q <= pc_q + 32'd4;
        end
        S_IDLE: if ((ilat & ~imask) != '0) st_q <= S_FETCH;
        default: ;   // S_HALT
      endcase
    end
  end
endmodule
