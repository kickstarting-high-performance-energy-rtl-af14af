// ecore_isa_pkg: the instruction encoding of the eCore in this design.
//
// The architecture lists the instruction set (floating point, integer, move,
// load/store with three addressing modes, branches, core state, chip
// synchronization) and the sixteen condition codes built from the flags, but
// not its bit-level encoding, so this design uses its own fixed 32-bit one:
//
//   R form  [31:26] op [25:20] rd [19:14] rn [13:8] rm [7:0] sub
//   I form  [31:26] op [25:20] rd [19:14] rn [13:0] simm14
//   M form  [31:26] op [25:20] rd            [15:0] imm16
//   B form  [31:26] op [25:22] cond          [21:0] simm22 (word offset)
//
// Load/store: sub[1:0] (R form) or simm14[13:12] (I form, with a signed
// 12-bit byte displacement in [11:0]) give the size (byte/half/word/double).
// MOV<cond> puts its condition in sub[3:0]. MOVTS/MOVFS name the special
// register in rn (MOVFS) or rd (MOVTS) field.
package ecore_isa_pkg;

  typedef enum logic [5:0] {
    OP_NOP    = 6'd0,
    OP_ADD    = 6'd1,  OP_SUB  = 6'd2,  OP_LSL  = 6'd3,  OP_LSR = 6'd4,
    OP_ASR    = 6'd5,  OP_EOR  = 6'd6,  OP_ORR  = 6'd7,  OP_AND = 6'd8,
    OP_BITR   = 6'd9,
    OP_ADDI   = 6'd10, OP_SUBI = 6'd11, OP_LSLI = 6'd12, OP_LSRI = 6'd13, OP_ASRI = 6'd14,
    OP_FADD   = 6'd16, OP_FSUB = 6'd17, OP_FMUL = 6'd18, OP_FMADD = 6'd19,
    OP_FMSUB  = 6'd20, OP_FIX  = 6'd21, OP_FLOAT = 6'd22, OP_FABS = 6'd23,
    OP_MOVC   = 6'd24, OP_MOVI = 6'd25, OP_MOVT = 6'd26, OP_MOVFS = 6'd27,
    OP_MOVTS  = 6'd28, OP_TESTSET = 6'd29,
    OP_LDRD   = 6'd32, OP_STRD = 6'd33,   // displacement
    OP_LDRX   = 6'd34, OP_STRX = 6'd35,   // index
    OP_LDRP   = 6'd36, OP_STRP = 6'd37,   // post-modify
    OP_B      = 6'd40, OP_BL   = 6'd41, OP_JR = 6'd42, OP_JALR = 6'd43,
    OP_IDLE   = 6'd48, OP_TRAP = 6'd49, OP_BKPT = 6'd50, OP_RTI = 6'd51,
    OP_GID    = 6'd52, OP_GIE  = 6'd53, OP_UNIMPL = 6'd54,
    OP_SYNC   = 6'd55, OP_MBKPT = 6'd56, OP_WAND = 6'd57
  } opcode_e;

  typedef enum logic [3:0] {
    C_EQ = 4'd0, C_NE = 4'd1, C_GTU = 4'd2, C_GTEU = 4'd3, C_LTEU = 4'd4, C_LTU = 4'd5,
    C_GT = 4'd6, C_GTE = 4'd7, C_LT = 4'd8, C_LTE = 4'd9, C_BEQ = 4'd10, C_BNE = 4'd11,
    C_BLT = 4'd12, C_BLTE = 4'd13, C_AL = 4'd14, C_AL2 = 4'd15
  } cond_e;

  localparam int unsigned LR = 14;   // link register

endpackage
