// tb_enode: one eNode at (32,8) of an 8x8 chip, driven through its mesh
// links as a host would. The program is written into local memory by cMesh
// write packets entering from the west; a write to the ILATST slot starts
// the core. The program fills a block, has DMA channel 0 copy it to another
// place in the same node (out of the node's router and back in), sleeps in
// IDLE until the DMA0 interrupt, starts Timer0 and sleeps until it expires,
// reads a word from a remote node (the test answers the rMesh request),
// then stores results off-chip (they leave on the xMesh east link). The
// test checks the off-chip writes and the copied block.
module tb_enode;
  import epiphany_pkg::*;
  import ecore_isa_pkg::*;
  import ecore_asm_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic       [2:0][3:0] in_valid, in_wait, out_valid, out_wait;
  emesh_pkt_t [2:0][3:0] in_pkt, out_pkt;
  logic sync_out, wand_out, mbkpt_out, halted, idle;
  enode dut (.clk, .rst_n, .in_valid, .in_pkt, .in_wait, .out_valid, .out_pkt, .out_wait,
             .sync_irq(1'b0), .wand_irq(1'b0), .user_irq(1'b0),
             .sync_out, .wand_out, .mbkpt_out, .halted, .idle);
  always #5 clk = ~clk;
  localparam logic [11:0] ME = 12'h808;

  logic [31:0] prog [int];
  int pc;
  task automatic emit(logic [31:0] ins); prog[pc] = ins; pc += 4; endtask
  task automatic li(int r, logic [31:0] v);
    emit(M(OP_MOVI, r, v[15:0])); emit(M(OP_MOVT, r, v[31:16]));
  endtask

  // host write into the west cMesh input
  task automatic host_write(logic [31:0] addr, logic [63:0] data, size_e sz = SZ_DBL);
    @(negedge clk);
    in_valid[0][3] = 1;
    in_pkt[0][3] = '{mcast: 0, write: 1, size: sz, addr: addr, data: data};
    do @(posedge clk); while (in_wait[0][3]);
    #1 in_valid[0][3] = 0;
  endtask

  logic [31:0] off_addr [$];
  logic [31:0] off_data [$];
  int reads_answered = 0;
  always @(negedge clk) out_wait = '0;
  always @(posedge clk) begin
    if (out_valid[2][1]) begin off_addr.push_back(out_pkt[2][1].addr); off_data.push_back(out_pkt[2][1].data[31:0]); end
    // rMesh read request leaving east: answer it on the cMesh west input
    if (out_valid[1][1]) begin
      emesh_pkt_t q;
      q = out_pkt[1][1];
      fork begin
        repeat (5) @(posedge clk);
        host_write(q.data[31:0], {2{q.addr ^ 32'h5A5A5A5A}}, q.size);
        reads_answered++;
      end join_none
    end
  end

  initial begin
    in_valid = '0; in_pkt = '0;
    // boot: vector 0 -> 0x180 stub -> main at 0x800
    pc = 0;      emit(B(OP_B, C_AL, 96));
    pc = 32'h18; emit(B(OP_B, C_AL, (32'h200 - 32'h18) / 4));   // DMA0 vector
    pc = 32'hC;  emit(B(OP_B, C_AL, (32'h240 - 32'hC) / 4));    // Timer0 vector
    pc = 32'h180; emit(M(OP_MOVI, 63, 16'h800)); emit(R(OP_MOVTS, SR_IRET, 63)); emit(R(OP_RTI, 0));
    pc = 32'h200; emit(I(OP_ADDI, 60, 60, 1)); emit(R(OP_RTI, 0));   // DMA0 handler
    pc = 32'h240; emit(I(OP_ADDI, 61, 61, 1)); emit(R(OP_RTI, 0));   // Timer0 handler
    pc = 32'h800;
    // fill 0x2000.. with i*i for i = 0..15 (words)
    emit(M(OP_MOVI, 1, 16'h2000)); emit(M(OP_MOVI, 2, 0)); emit(M(OP_MOVI, 3, 16));
    emit(M(OP_MOVI, 4, 4));
    begin
      int l;
      l = pc;
      emit(R(OP_ORR, 5, 2, 2));
      emit(M(OP_MOVI, 6, 0));
      // r6 = r2*r2 by repeated addition
      emit(R(OP_ORR, 7, 2, 2));
      emit(B(OP_B, C_EQ, 4));                 // r7==0? (flags from ORR) skip
      emit(R(OP_ADD, 6, 6, 2)); emit(I(OP_SUBI, 7, 7, 1)); emit(B(OP_B, C_NE, -2));
      emit(R(OP_STRP, 6, 1, 4, 2));           // [r1] = r6, r1 += 4
      emit(I(OP_ADDI, 2, 2, 1)); emit(R(OP_SUB, 8, 2, 3)); emit(B(OP_B, C_NE, (l - pc) / 4));
    end
    // enable DMA0 + Timer0 interrupts only
    emit(M(OP_MOVI, 9, 16'h3FF ^ 16'h048)); emit(R(OP_MOVTS, SR_IMASK, 9));
    // DMA0: 8 doublewords 0x2000 -> {ME, 0x3000}
    emit(M(OP_MOVI, 10, 16'h2000)); emit(R(OP_MOVTS, SR_DMA0SRC, 10));
    li(11, {ME, 20'h03000});        emit(R(OP_MOVTS, SR_DMA0DST, 11));
    emit(M(OP_MOVI, 12, 8));        emit(R(OP_MOVTS, SR_DMA0CNT, 12));
    emit(R(OP_IDLE, 0));
    // Timer0: count 50 clock cycles
    emit(M(OP_MOVI, 13, 50));  emit(R(OP_MOVTS, SR_TIMER0, 13));
    emit(M(OP_MOVI, 14, 16'h10)); emit(R(OP_MOVTS, SR_CONFIG, 14));
    emit(R(OP_IDLE, 0));
    // remote read from node (33,9)
    li(15, 32'h84900040); emit(LSD(OP_LDRD, 16, 15, 2, 0));
    // results off-chip: handler counts, copied word 15, remote word
    li(20, 32'h8E000000);
    emit(LSD(OP_STRD, 60, 20, 2, 0)); emit(LSD(OP_STRD, 61, 20, 2, 4));
    li(21, 32'h303C); emit(LSD(OP_LDRD, 22, 21, 2, 0)); emit(LSD(OP_STRD, 22, 20, 2, 8));
    emit(LSD(OP_STRD, 16, 20, 2, 12));
    emit(R(OP_TRAP, 0));

    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) @(posedge clk);
    foreach (prog[a]) if ((a & 4) == 0)
      host_write({ME, 20'(a)}, {prog.exists(a + 4) ? prog[a + 4] : 32'd0, prog[a]});
    foreach (prog[a]) if ((a & 4) != 0 && !prog.exists(a - 4))
      host_write({ME, 20'(a - 4)}, {prog[a], 32'd0});
    host_write({ME, ILATST_SLOT}, 64'h1, SZ_WORD);
    wait (halted);
    repeat (30) @(posedge clk);
    checks++;
    if (off_addr.size() != 4) begin failures++; $display("FAIL %0d off-chip writes", off_addr.size()); end
    else begin
      logic [31:0] ea [4] = '{32'h8E000000, 32'h8E000004, 32'h8E000008, 32'h8E00000C};
      logic [31:0] ed [4];
      ed = '{1, 1, 225, 32'h84900040 ^ 32'h5A5A5A5A};
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (off_addr[k] != ea[k] || off_data[k] != ed[k]) begin
          failures++; $display("FAIL off-chip %0d: %h %h expected %h %h", k, off_addr[k], off_data[k], ea[k], ed[k]);
        end
      end
    end
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (dut.u_mem.g_bank[1].u_bank.mem[512 + (i / 2)][32 * (i % 2) +: 32] != 32'(i * i)) begin
        failures++; $display("FAIL copied word %0d", i);
      end
    end
    checks++; if (reads_answered != 1) begin failures++; $display("FAIL reads %0d", reads_answered); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (30000) @(posedge clk);
    $display("INFO watchdog pc=%h st=%0d", dut.u_core.pc_q, dut.u_core.st_q);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
