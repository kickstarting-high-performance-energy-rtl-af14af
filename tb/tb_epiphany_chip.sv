// tb_epiphany_chip: end-to-end run of the chip, reduced to a 2x2 mesh so
// that it builds and runs quickly (the 8x8 default builds too slowly here). A host model on the west edge writes one program into all 64
// nodes over the cMesh and starts every core through its ILATST slot. Each
// core then:
//   - computes y = idx*idx + 1.5 on the FPU (idx = its position, 0..63),
//   - posts y and a flag to its east neighbour (wrapping in the row) over
//     the cMesh and polls for its west neighbour's values,
//   - reads back, over the rMesh, what it wrote to its east neighbour,
//   - core 0 multicasts a word to every node's multicast group,
//   - joins a WAND barrier, then sends its 48-byte result block off-chip
//     with DMA channel 0 (xMesh, leaves on the east edge) and sleeps until
//     the DMA0 interrupt, then executes TRAP.
// The test checks all 64 result blocks and counts how often the mechanisms
// happened: mesh push-back, multicast copies taken, remote reads, DMA
// completions, WAND interrupts, memory bank conflicts, FPU operations.
module tb_epiphany_chip;
  import epiphany_pkg::*;
  import ecore_isa_pkg::*;
  import ecore_asm_pkg::*;
  localparam int ROWS = 2, COLS = 2, NN = ROWS * COLS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       [2:0][COLS-1:0] n_out_valid, n_out_wait, n_in_valid, n_in_wait;
  emesh_pkt_t [2:0][COLS-1:0] n_out_pkt, n_in_pkt;
  logic       [2:0][COLS-1:0] s_out_valid, s_out_wait, s_in_valid, s_in_wait;
  emesh_pkt_t [2:0][COLS-1:0] s_out_pkt, s_in_pkt;
  logic       [2:0][ROWS-1:0] e_out_valid, e_out_wait, e_in_valid, e_in_wait;
  emesh_pkt_t [2:0][ROWS-1:0] e_out_pkt, e_in_pkt;
  logic       [2:0][ROWS-1:0] w_out_valid, w_out_wait, w_in_valid, w_in_wait;
  emesh_pkt_t [2:0][ROWS-1:0] w_out_pkt, w_in_pkt;
  logic [NN-1:0] user_irq, halted, idle;
  logic mbkpt;

  epiphany_chip #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  // ---------------- program ----------------
  logic [31:0] prog [int];
  int pc;
  task automatic emit(logic [31:0] ins); prog[pc] = ins; pc += 4; endtask
  task automatic li(int r, logic [31:0] v);
    emit(M(OP_MOVI, r, v[15:0])); emit(M(OP_MOVT, r, v[31:16]));
  endtask
  task automatic poll_nonzero(int areg, int tmp);   // wait until word [areg] != 0
    emit(LSD(OP_LDRD, tmp, areg, 2, 0));
    emit(R(OP_ORR, tmp, tmp, tmp));
    emit(B(OP_B, C_EQ, -2));
  endtask

  task automatic build();
    pc = 0;      emit(B(OP_B, C_AL, 96));                               // SYNC -> boot
    for (int v = 1; v < 10; v++) begin pc = 4 * v; emit(R(OP_RTI, 0)); end   // unused vectors
    pc = 32'h18; emit(B(OP_B, C_AL, (32'h200 - 32'h18) / 4));           // DMA0
    pc = 32'h20; emit(B(OP_B, C_AL, (32'h240 - 32'h20) / 4));           // WAND
    pc = 32'h180; emit(M(OP_MOVI, 63, 16'h800)); emit(R(OP_MOVTS, SR_IRET, 63)); emit(R(OP_RTI, 0));
    pc = 32'h200; emit(I(OP_ADDI, 60, 60, 1)); emit(R(OP_RTI, 0));
    pc = 32'h240; emit(I(OP_ADDI, 61, 61, 1)); emit(R(OP_RTI, 0));
    pc = 32'h800;
    emit(M(OP_MOVI, 9, 16'h3FF)); emit(R(OP_MOVTS, SR_IMASK, 9));
    emit(R(OP_MOVFS, 1, SR_COREID));
    emit(M(OP_MOVI, 3, 16'h3F)); emit(R(OP_AND, 2, 1, 3));              // r2 = col
    emit(I(OP_LSRI, 10, 1, 6)); emit(I(OP_SUBI, 10, 10, 32)); emit(I(OP_LSLI, 10, 10, $clog2(COLS)));
    emit(I(OP_SUBI, 11, 2, 8)); emit(R(OP_ADD, 12, 10, 11));            // r12 = idx
    emit(R(OP_SUB, 4, 1, 2));                                            // row << 6
    emit(I(OP_ADDI, 2, 2, 1)); emit(I(OP_SUBI, 5, 2, 8 + COLS));
    emit(M(OP_MOVI, 6, 8)); emit(R(OP_MOVC, 2, 6, 0, C_EQ));            // wrap to col 8
    emit(R(OP_ORR, 7, 4, 2)); emit(I(OP_LSLI, 7, 7, 20));               // r7 = east neighbour base
    // multicast group
    emit(M(OP_MOVI, 8, 16'hFFF)); emit(R(OP_MOVTS, SR_MULTICAST, 8));
    // y = idx*idx + 1.5
    emit(R(OP_FLOAT, 20, 12)); li(21, 32'h3FC00000);
    emit(R(OP_FMADD, 21, 20, 20));
    emit(M(OP_MOVI, 30, 16'h4000));
    emit(LSD(OP_STRD, 21, 30, 2, 16'h10));                               // own y
    // post y and flag to the east neighbour
    emit(LSD(OP_STRD, 21, 7, 2, 0)); emit(M(OP_MOVI, 22, 1)); emit(LSD(OP_STRD, 22, 7, 2, 4));
    // core 0: multicast 0x77 to 0x4020 of every node (and itself locally)
    emit(R(OP_ORR, 12, 12, 12)); emit(B(OP_B, C_NE, 10));
    emit(M(OP_MOVI, 23, 16'h77)); emit(LSD(OP_STRD, 23, 30, 2, 16'h20));
    emit(M(OP_MOVI, 24, 16'h1000)); emit(R(OP_MOVTS, SR_CONFIG, 24));
    li(25, 32'hFFF04020); emit(LSD(OP_STRD, 23, 25, 2, 0));
    emit(M(OP_MOVI, 24, 0)); emit(R(OP_MOVTS, SR_CONFIG, 24));
    // wait for the west neighbour's flag and for the multicast word
    emit(I(OP_ADDI, 31, 30, 4)); poll_nonzero(31, 26);
    emit(I(OP_ADDI, 31, 30, 16'h20)); poll_nonzero(31, 26);
    // remote read of what we wrote east
    emit(LSD(OP_LDRD, 27, 7, 2, 0)); emit(LSD(OP_STRD, 27, 30, 2, 16'h18));
    // WAND barrier: enable WAND and DMA0 interrupts
    emit(M(OP_MOVI, 9, 16'h3FF ^ 16'h140)); emit(R(OP_MOVTS, SR_IMASK, 9));
    emit(R(OP_WAND, 0)); emit(R(OP_IDLE, 0));
    // DMA the block 0x4000..0x402F off-chip to 0x8E000000 + idx*64
    emit(R(OP_MOVTS, SR_DMA0SRC, 30));
    emit(I(OP_LSLI, 13, 12, 6)); li(14, 32'h8E000000); emit(R(OP_ADD, 13, 13, 14));
    emit(R(OP_MOVTS, SR_DMA0DST, 13));
    emit(M(OP_MOVI, 15, 6)); emit(R(OP_MOVTS, SR_DMA0CNT, 15));
    emit(R(OP_IDLE, 0));
    emit(R(OP_TRAP, 0));
  endtask

  // ---------------- host on the west edge ----------------
  task automatic host_write(int row, logic [31:0] addr, logic [63:0] data, size_e sz = SZ_DBL);
    @(negedge clk);
    w_in_valid[0][row] = 1;
    w_in_pkt[0][row] = '{mcast: 0, write: 1, size: sz, addr: addr, data: data};
    do @(posedge clk); while (w_in_wait[0][row]);
    #1 w_in_valid[0][row] = 0;
  endtask

  // ---------------- off-chip sinks and counters ----------------
  logic [63:0] result [NN][6];
  int nres = 0, edge_mcast = 0, stray = 0;
  always @(negedge clk) begin
    n_out_wait = '0; s_out_wait = '0; w_out_wait = '0;
    e_out_wait = '0;
    for (int r = 0; r < ROWS; r++) e_out_wait[2][r] = 1'($urandom_range(0, 3) == 0);   // slow off-chip link
  end
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < ROWS; r++) begin
      if (e_out_valid[2][r] && !e_out_wait[2][r]) begin
        logic [31:0] a; a = e_out_pkt[2][r].addr;
        if (a[31:20] == 12'h8E0 && a[19:0] < 20'(NN * 64)) begin
          result[a[19:6]][a[5:3]] = e_out_pkt[2][r].data; nres++;
        end else stray++;
      end
    end
    for (int m = 0; m < 3; m++) begin
      for (int c = 0; c < COLS; c++) edge_mcast += int'(n_out_valid[m][c] && n_out_pkt[m][c].mcast) +
                                                   int'(s_out_valid[m][c] && s_out_pkt[m][c].mcast);
      for (int r = 0; r < ROWS; r++) edge_mcast += int'(w_out_valid[m][r] && w_out_pkt[m][r].mcast) +
                                                   int'(e_out_valid[m][r] && e_out_pkt[m][r].mcast);
    end
  end

  int pushbacks = 0, mcast_in = 0, rreads = 0, dma_done = 0, wand_irqs = 0, conflicts = 0, fpu_ops = 0;
  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      always @(posedge clk) if (rst_n) begin
        pushbacks += $countones(dut.g_row[r].g_col[c].u_node.g_mesh[0].r_in_valid & dut.g_row[r].g_col[c].u_node.g_mesh[0].r_in_wait)
                   + $countones(dut.g_row[r].g_col[c].u_node.g_mesh[1].r_in_valid & dut.g_row[r].g_col[c].u_node.g_mesh[1].r_in_wait)
                   + $countones(dut.g_row[r].g_col[c].u_node.g_mesh[2].r_in_valid & dut.g_row[r].g_col[c].u_node.g_mesh[2].r_in_wait);
        mcast_in  += int'(dut.g_row[r].g_col[c].u_node.g_mesh[0].r_out_valid[4] && !dut.g_row[r].g_col[c].u_node.g_mesh[0].r_out_wait[4]
                          && dut.g_row[r].g_col[c].u_node.g_mesh[0].r_out_pkt[4].mcast);
        rreads    += int'(dut.g_row[r].g_col[c].u_node.g_mesh[1].r_out_valid[4] && !dut.g_row[r].g_col[c].u_node.g_mesh[1].r_out_wait[4]);
        dma_done  += $countones(dut.g_row[r].g_col[c].u_node.dma_done);
        wand_irqs += int'(dut.g_row[r].g_col[c].u_node.wand_irq);
        conflicts += int'(|(dut.g_row[r].g_col[c].u_node.m_req & ~dut.g_row[r].g_col[c].u_node.m_gnt));
        fpu_ops   += int'(dut.g_row[r].g_col[c].u_node.ev_fpu);
      end
    end
  end

  initial begin
    w_in_valid = '0; w_in_pkt = '0; e_in_valid = '0; e_in_pkt = '0;
    n_in_valid = '0; n_in_pkt = '0; s_in_valid = '0; s_in_pkt = '0;
    user_irq = '0;
    build();
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3) @(posedge clk);
    // load all nodes, one host port per row
    for (int r = 0; r < ROWS; r++) fork
      automatic int rr = r;
      begin
        for (int c = 0; c < COLS; c++) begin
          automatic logic [11:0] id;
          id = {6'(32 + rr), 6'(8 + c)};
          foreach (prog[a]) if ((a & 4) == 0)
            host_write(rr, {id, 20'(a)}, {prog.exists(a + 4) ? prog[a + 4] : 32'd0, prog[a]});
          foreach (prog[a]) if ((a & 4) != 0 && !prog.exists(a - 4))
            host_write(rr, {id, 20'(a - 4)}, {prog[a], 32'd0});
        end
        for (int c = 0; c < COLS; c++)
          host_write(rr, {6'(32 + rr), 6'(8 + c), ILATST_SLOT}, 64'h1, SZ_WORD);
      end
    join_none
    wait fork;
    $display("INFO programs loaded at %0t", $time);
    wait (&halted);
    repeat (50) @(posedge clk);
    for (int i = 0; i < NN; i++) begin
      logic [31:0] y_me, y_west;
      int w;
      w = (i % COLS == 0) ? i + COLS - 1 : i - 1;
      y_me   = fbits(real'(i * i) + 1.5);
      y_west = fbits(real'(w * w) + 1.5);
      checks++;
      if (result[i][0] != {32'd1, y_west} || result[i][2] != {32'd0, y_me} ||
          result[i][3][31:0] != y_me || result[i][4][31:0] != 32'h77) begin
        failures++;
        $display("FAIL node %0d: %h %h %h %h", i, result[i][0], result[i][2], result[i][3], result[i][4]);
      end
    end
    $display("INFO results=%0d stray=%0d pushbacks=%0d mcast_in=%0d edge_mcast=%0d remote_reads=%0d dma_done=%0d wand_irqs=%0d bank_conflicts=%0d fpu_ops=%0d",
             nres, stray, pushbacks, mcast_in, edge_mcast, rreads, dma_done, wand_irqs, conflicts, fpu_ops);
    checks++; if (nres != NN * 6 || stray != 0) begin failures++; $display("FAIL result count"); end
    checks++; if (pushbacks == 0)  begin failures++; $display("FAIL no push-back"); end
    checks++; if (mcast_in != NN - 1) begin failures++; $display("FAIL multicast copies %0d", mcast_in); end
    checks++; if (rreads != NN)    begin failures++; $display("FAIL remote reads"); end
    checks++; if (dma_done != NN)  begin failures++; $display("FAIL dma"); end
    checks++; if (wand_irqs == 0)  begin failures++; $display("FAIL wand"); end
    checks++; if (conflicts == 0)  begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (fpu_ops != 2 * NN) begin failures++; $display("FAIL fpu ops %0d", fpu_ops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] fbits(real v);   // exact for the values used here
    logic [63:0] d;
    d = $realtobits(v);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    $display("INFO watchdog: halted=%h pc0=%h st0=%0d pc3=%h st3=%0d", halted,
             dut.g_row[0].g_col[0].u_node.u_core.pc_q, dut.g_row[0].g_col[0].u_node.u_core.st_q,
             dut.g_row[1].g_col[1].u_node.u_core.pc_q, dut.g_row[1].g_col[1].u_node.u_core.st_q);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
