// tb_ecore: runs a test program on the eCore with a model local memory
// (random refusals, one-cycle read latency) and a model network. The
// program covers integer arithmetic and flags, a counted loop with a
// conditional branch, conditional moves on integer and float flags, call
// and return, loads and stores of every size in all three addressing modes,
// FPU operations, an interrupt taken out of IDLE with RTI, a posted remote
// store, a remote load, TESTSET, WAND and TRAP. Results stored by the
// program are compared with values computed here.
module tb_ecore;
  import epiphany_pkg::*;
  import ecore_isa_pkg::*;
  import ecore_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic if_req, if_gnt, if_rvalid, d_req, d_we, d_gnt, d_rvalid;
  logic [31:0] if_addr, d_addr;
  logic [63:0] if_rdata, d_rdata, d_wdata;
  logic [7:0] d_be;
  logic ni_valid, ni_write, ni_mcast, ni_ready, ni_rvalid;
  size_e ni_size;
  logic [31:0] ni_addr;
  logic [63:0] ni_wdata, ni_rdata;
  logic sr_we;
  logic [5:0] sr_addr;
  logic [31:0] sr_wd, sr_rd = 0, config_q;
  logic [9:0] irq = 0, ilat_ext = 0;
  logic wand_out, sync_out, mbkpt_out, halted, trap, idle, ev_retire, ev_fpu, ev_stall;
  ecore #(.COREID(12'h849)) dut (.*);
  always #5 clk = ~clk;

  logic [63:0] mem [4096];
  always @(negedge clk) begin
    if_gnt = 1'($urandom);
    d_gnt  = ($urandom_range(0, 3) != 0);
  end
  always @(posedge clk) begin
    if_rvalid <= if_req && if_gnt;
    if_rdata  <= mem[if_addr[14:3]];
    d_rvalid  <= d_req && d_gnt && !d_we;
    if (d_req && d_gnt && !d_we) d_rdata <= mem[d_addr[14:3]];
    if (d_req && d_gnt && d_we)
      for (int b = 0; b < 8; b++) if (d_be[b]) mem[d_addr[14:3]][8*b +: 8] <= d_wdata[8*b +: 8];
  end
  // network model: stores are recorded, loads answered after a delay
  logic [31:0] rem_addr; logic [63:0] rem_data; int rem_writes = 0;
  always @(negedge clk) ni_ready = 1'($urandom);
  always @(posedge clk) begin
    ni_rvalid <= 0;
    if (ni_valid && ni_ready) begin
      if (ni_write) begin rem_addr <= ni_addr; rem_data <= ni_wdata; rem_writes++; end
      else fork begin repeat (7) @(posedge clk); ni_rdata <= 64'hCAFEF00D_CAFEF00D; ni_rvalid <= 1; end join_none
    end
  end

  function automatic void put(int byte_addr, logic [31:0] ins);
    mem[byte_addr >> 3][32 * ((byte_addr >> 2) & 1) +: 32] = ins;
  endfunction
  function automatic logic [31:0] word_at(int a);
    return mem[a >> 3][32 * ((a >> 2) & 1) +: 32];
  endfunction
  task automatic chk(int a, logic [31:0] exp, string what);
    checks++;
    if (word_at(a) !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, word_at(a), exp); end
  endtask
  function automatic logic [31:0] bitr(logic [31:0] x);
    logic [31:0] y; for (int k = 0; k < 32; k++) y[k] = x[31-k]; return y;
  endfunction

  int pc;
  task automatic emit(logic [31:0] ins); put(pc, ins); pc += 4; endtask
  task automatic st(int rd, int off); emit(LSD(OP_STRD, rd, 30, 2, off)); endtask

  initial begin
    int loop_pc;
    for (int k = 0; k < 4096; k++) mem[k] = 0;
    put(32'h0, B(OP_B, C_AL, 96));            // reset vector -> boot stub at 0x180
    pc = 32'h180;                             // end the SYNC service, continue at 0x800
    emit(M(OP_MOVI, 63, 16'h800)); emit(R(OP_MOVTS, SR_IRET, 63)); emit(R(OP_RTI, 0));
    put(32'hC, B(OP_B, C_AL, 125));           // timer0 vector -> 0x200
    pc = 32'h200;                             // interrupt handler
    emit(M(OP_MOVI, 51, 16'h77)); emit(R(OP_RTI, 0));
    pc = 32'h300;                             // subroutine
    emit(I(OP_ADDI, 20, 20, 1)); emit(R(OP_JR, 0, LR));
    pc = 32'h800;
    emit(M(OP_MOVI, 30, 16'h1000)); emit(M(OP_MOVI, 31, 16'h40));
    emit(M(OP_MOVI, 1, 5)); emit(M(OP_MOVI, 2, 7));
    emit(R(OP_ADD, 3, 1, 2)); emit(R(OP_SUB, 4, 1, 2));
    emit(M(OP_MOVI, 5, 16'h1234)); emit(M(OP_MOVT, 5, 16'hABCD));
    emit(R(OP_BITR, 6, 5)); emit(R(OP_EOR, 7, 5, 6));
    emit(I(OP_ASRI, 8, 5, 4)); emit(I(OP_LSLI, 9, 1, 3));
    emit(M(OP_MOVI, 10, 0)); emit(M(OP_MOVI, 11, 10));
    loop_pc = pc;
    emit(I(OP_ADDI, 10, 10, 3)); emit(I(OP_SUBI, 11, 11, 1));
    emit(B(OP_B, C_NE, (loop_pc - pc) / 4));
    emit(R(OP_SUB, 12, 1, 2));                // 5-7: LT true, GTU false
    emit(M(OP_MOVI, 13, 99)); emit(M(OP_MOVI, 15, 1)); emit(M(OP_MOVI, 16, 0));
    emit(R(OP_MOVC, 15, 13, 0, C_LT)); emit(R(OP_MOVC, 16, 13, 0, C_GTU));
    emit(B(OP_BL, C_AL, (32'h300 - pc) / 4));
    emit(B(OP_BL, C_AL, (32'h300 - pc) / 4));
    st(3, 0); st(4, 4); st(5, 8); st(6, 12); st(7, 16); st(8, 20); st(9, 24); st(10, 28);
    st(15, 32); st(16, 36); st(20, 40);
    emit(R(OP_ORR, 22, 3, 3)); emit(R(OP_ORR, 23, 4, 4));
    emit(LSD(OP_STRD, 22, 30, 3, 16'h30));            // double store
    emit(R(OP_STRX, 1, 30, 31, 0));                    // byte store at 0x1040
    emit(R(OP_ORR, 25, 30, 30));
    emit(R(OP_LDRP, 24, 25, 31, 2));                   // r24 = [0x1000], r25 += 0x40
    st(24, 16'h44); st(25, 16'h48);
    emit(LSD(OP_LDRD, 26, 30, 0, 16'h40)); st(26, 16'h4C);
    emit(R(OP_LDRX, 28, 30, 31, 3));                   // double load of 0x1040
    st(28, 16'h80); st(29, 16'h84);
    // floating point
    emit(M(OP_MOVI, 40, 3)); emit(R(OP_FLOAT, 40, 40));
    emit(M(OP_MOVI, 41, 4)); emit(R(OP_FLOAT, 41, 41));
    emit(R(OP_FMUL, 42, 40, 41)); emit(R(OP_ORR, 44, 42, 42));
    emit(R(OP_FMADD, 44, 40, 41)); emit(R(OP_FIX, 45, 44));
    st(42, 16'h50); st(44, 16'h54); st(45, 16'h58);
    emit(R(OP_FSUB, 46, 40, 41)); emit(M(OP_MOVI, 47, 0));
    emit(R(OP_MOVC, 47, 13, 0, C_BLT)); st(47, 16'h5C);
    // interrupt out of IDLE
    emit(M(OP_MOVI, 50, 16'h3F7)); emit(R(OP_MOVTS, SR_IMASK, 50)); emit(R(OP_IDLE, 0));
    st(51, 16'h60);
    // remote store and load
    emit(M(OP_MOVI, 52, 0)); emit(M(OP_MOVT, 52, 16'h8E00));
    emit(LSD(OP_STRD, 3, 52, 2, 0)); emit(LSD(OP_LDRD, 53, 52, 2, 8)); st(53, 16'h64);
    // TESTSET twice
    emit(M(OP_MOVI, 54, 16'h1070)); emit(M(OP_MOVI, 55, 0));
    emit(M(OP_MOVI, 56, 16'h42)); emit(R(OP_TESTSET, 56, 54, 55));
    emit(M(OP_MOVI, 57, 16'h43)); emit(R(OP_TESTSET, 57, 54, 55));
    st(56, 16'h74); st(57, 16'h78);
    emit(R(OP_WAND, 0)); emit(R(OP_TRAP, 0));

    repeat (3) @(posedge clk); rst_n = 1;
    repeat (5) @(posedge clk);
    checks++; if (!idle) begin failures++; $display("FAIL core not idle after reset"); end
    @(negedge clk); irq[IRQ_SYNC] = 1; @(negedge clk); irq[IRQ_SYNC] = 0;
    wait (!idle);
    wait (idle);                                    // the program's IDLE
    repeat (10) @(negedge clk);
    irq[IRQ_TIMER0] = 1; @(negedge clk); irq[IRQ_TIMER0] = 0;
    wait (halted);
    @(negedge clk);
    chk(32'h1000, 12, "ADD"); chk(32'h1004, -2, "SUB");
    chk(32'h1008, 32'hABCD1234, "MOVI/MOVT"); chk(32'h100C, bitr(32'hABCD1234), "BITR");
    chk(32'h1010, 32'hABCD1234 ^ bitr(32'hABCD1234), "EOR");
    chk(32'h1014, 32'hFABCD123, "ASR"); chk(32'h1018, 40, "LSL");
    chk(32'h101C, 30, "loop"); chk(32'h1020, 99, "MOVLT"); chk(32'h1024, 0, "MOVGTU");
    chk(32'h1028, 2, "BL/JR twice");
    chk(32'h1030, 12, "STRD low"); chk(32'h1034, -2, "STRD high");
    chk(32'h1040, 5, "byte store"); chk(32'h1044, 12, "postmod load");
    chk(32'h1048, 32'h1040, "postmod update"); chk(32'h104C, 5, "byte load");
    chk(32'h1080, 5, "double load low"); chk(32'h1084, 12, "double load high");
    chk(32'h1050, 32'h41400000, "FMUL 12.0"); chk(32'h1054, 32'h41C00000, "FMADD 24.0");
    chk(32'h1058, 24, "FIX"); chk(32'h105C, 99, "MOVBLT");
    chk(32'h1060, 32'h77, "interrupt handler ran");
    chk(32'h1064, 32'hCAFEF00D, "remote load");
    chk(32'h1070, 32'h42, "TESTSET set"); chk(32'h1074, 0, "TESTSET first result");
    chk(32'h1078, 32'h42, "TESTSET second result");
    checks++; if (rem_writes != 1 || rem_addr != 32'h8E000000 || rem_data[31:0] != 12) begin
      failures++; $display("FAIL remote store %0d %h %h", rem_writes, rem_addr, rem_data); end
    checks++; if (!wand_out || !trap) begin failures++; $display("FAIL wand/trap"); end
    checks++; if (dut.ipend != 10'h000) begin failures++; $display("FAIL ipend %b", dut.ipend); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("INFO watchdog: pc=%h state=%0d", dut.pc_q, dut.st_q);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
