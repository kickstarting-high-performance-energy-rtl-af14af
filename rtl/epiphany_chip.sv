// epiphany_chip: an Epiphany manycore chip, by default the 64-core
// Epiphany-IV arrangement (8 x 8 eNodes, 32 KB of local memory each).
//
// Every node talks only to its four neighbours, on three independent meshes
// (cMesh on-chip writes, rMesh read requests, xMesh off-chip writes). Links
// that reach the chip boundary are brought out as ports, one per mesh and
// per boundary node, so several chips can be tiled or an off-chip agent can
// be attached; the chip's global position is set by CHIP_ROW0/CHIP_COL0
// (row 32, column 8 as on the 16-core Parallella chip). Node (r,c) has the
// global coordinates (CHIP_ROW0+r, CHIP_COL0+c); row 0 is the north edge,
// column 0 the west edge.
//
// Chip-wide lines: the OR of all cores' SYNC pulses raises the SYNC interrupt
// in every core; when every core has executed WAND the WAND interrupt is
// raised everywhere (a wired AND); any core's MBKPT is reported on mbkpt.
//
// Edge port arrays: n_* and s_* are [mesh][column], e_* and w_* are
// [mesh][row]; *_out_* leave the chip, *_in_* enter it, each a valid/pkt/wait
// link. The mesh of nodes and the three networks follow the architecture;
// the edge ports are raw mesh links, not the byte-wide eLink (see README).
module epiphany_chip
  import epiphany_pkg::*;
#(
  parameter int unsigned      ROWS      = 8,
  parameter int unsigned      COLS      = 8,
  parameter logic [ROW_W-1:0] CHIP_ROW0 = 6'd32,
  parameter logic [COL_W-1:0] CHIP_COL0 = 6'd8,
  parameter int unsigned      MEM_BYTES = 32768
) (
  input  logic                         clk,
  input  logic                         rst_n,
  output logic       [2:0][COLS-1:0]   n_out_valid,
  output emesh_pkt_t [2:0][COLS-1:0]   n_out_pkt,
  input  logic       [2:0][COLS-1:0]   n_out_wait,
  input  logic       [2:0][COLS-1:0]   n_in_valid,
  input  emesh_pkt_t [2:0][COLS-1:0]   n_in_pkt,
  output logic       [2:0][COLS-1:0]   n_in_wait,
  output logic       [2:0][COLS-1:0]   s_out_valid,
  output emesh_pkt_t [2:0][COLS-1:0]   s_out_pkt,
  input  logic       [2:0][COLS-1:0]   s_out_wait,
  input  logic       [2:0][COLS-1:0]   s_in_valid,
  input  emesh_pkt_t [2:0][COLS-1:0]   s_in_pkt,
  output logic       [2:0][COLS-1:0]   s_in_wait,
  output logic       [2:0][ROWS-1:0]   e_out_valid,
  output emesh_pkt_t [2:0][ROWS-1:0]   e_out_pkt,
  input  logic       [2:0][ROWS-1:0]   e_out_wait,
  input  logic       [2:0][ROWS-1:0]   e_in_valid,
  input  emesh_pkt_t [2:0][ROWS-1:0]   e_in_pkt,
  output logic       [2:0][ROWS-1:0]   e_in_wait,
  output logic       [2:0][ROWS-1:0]   w_out_valid,
  output emesh_pkt_t [2:0][ROWS-1:0]   w_out_pkt,
  input  logic       [2:0][ROWS-1:0]   w_out_wait,
  input  logic       [2:0][ROWS-1:0]   w_in_valid,
  input  emesh_pkt_t [2:0][ROWS-1:0]   w_in_pkt,
  output logic       [2:0][ROWS-1:0]   w_in_wait,
  input  logic [ROWS*COLS-1:0]         user_irq,
  output logic [ROWS*COLS-1:0]         halted,
  output logic [ROWS*COLS-1:0]         idle,
  output logic                         mbkpt
);
  localparam int unsigned N = 0, E = 1, S = 2, W = 3;

  // per-node link bundles, [row][col][mesh][side]
  logic       [ROWS-1:0][COLS-1:0][2:0][3:0] iv, iw, ov, ow;
  emesh_pkt_t [ROWS-1:0][COLS-1:0][2:0][3:0] ip, op;
  logic [ROWS*COLS-1:0] sync_v, wand_v, mbkpt_v;
  logic sync_irq, wand_all, wand_q, wand_irq;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      enode #(
        .ROW(CHIP_ROW0 + ROW_W'(r)), .COL(CHIP_COL0 + COL_W'(c)),
        .CHIP_ROW0(CHIP_ROW0), .CHIP_COL0(CHIP_COL0), .ROWS(ROWS), .COLS(COLS),
        .MEM_BYTES(MEM_BYTES)
      ) u_node (
        .clk, .rst_n,
        .in_valid(iv[r][c]), .in_pkt(ip[r][c]), .in_wait(iw[r][c]),
        .out_valid(ov[r][c]), .out_pkt(op[r][c]), .out_wait(ow[r][c]),
        .sync_irq, .wand_irq, .user_irq(user_irq[r*COLS+c]),
        .sync_out(sync_v[r*COLS+c]), .wand_out(wand_v[r*COLS+c]),
        .mbkpt_out(mbkpt_v[r*COLS+c]), .halted(halted[r*COLS+c]), .idle(idle[r*COLS+c])
      );
      for (genvar m = 0; m < 3; m++) begin : g_m
        // north side
        if (r == 0) begin : g_nedge
          assign n_out_valid[m][c] = ov[r][c][m][N];
          assign n_out_pkt[m][c]   = op[r][c][m][N];
          assign ow[r][c][m][N]    = n_out_wait[m][c];
          assign iv[r][c][m][N]    = n_in_valid[m][c];
          assign ip[r][c][m][N]    = n_in_pkt[m][c];
          assign n_in_wait[m][c]   = iw[r][c][m][N];
        end else begin : g_nlink
          assign iv[r][c][m][N] = ov[r-1][c][m][S];
          assign ip[r][c][m][N] = op[r-1][c][m][S];
          assign ow[r-1][c][m][S] = iw[r][c][m][N];
        end
        // south side
        if (r == ROWS - 1) begin : g_sedge
          assign s_out_valid[m][c] = ov[r][c][m][S];
          assign s_out_pkt[m][c]   = op[r][c][m][S];
          assign ow[r][c][m][S]    = s_out_wait[m][c];
          assign iv[r][c][m][S]    = s_in_valid[m][c];
          assign ip[r][c][m][S]    = s_in_pkt[m][c];
          assign s_in_wait[m][c]   = iw[r][c][m][S];
        end else begin : g_slink
          assign iv[r][c][m][S] = ov[r+1][c][m][N];
          assign ip[r][c][m][S] = op[r+1][c][m][N];
          assign ow[r+1][c][m][N] = iw[r][c][m][S];
        end
        // west side
        if (c == 0) begin : g_wedge
          assign w_out_valid[m][r] = ov[r][c][m][W];
          assign w_out_pkt[m][r]   = op[r][c][m][W];
          assign ow[r][c][m][W]    = w_out_wait[m][r];
          assign iv[r][c][m][W]    = w_in_valid[m][r];
          assign ip[r][c][m][W]    = w_in_pkt[m][r];
          assign w_in_wait[m][r]   = iw[r][c][m][W];
        end else begin : g_wlink
          assign iv[r][c][m][W] = ov[r][c-1][m][E];
          assign ip[r][c][m][W] = op[r][c-1][m][E];
          assign ow[r][c-1][m][E] = iw[r][c][m][W];
        end
        // east side
        if (c == COLS - 1) begin : g_eedge
          assign e_out_valid[m][r] = ov[r][c][m][E];
          assign e_out_pkt[m][r]   = op[r][c][m][E];
          assign ow[r][c][m][E]    = e_out_wait[m][r];
          assign iv[r][c][m][E]    = e_in_valid[m][r];
          assign ip[r][c][m][E]    = e_in_pkt[m][r];
          assign e_in_wait[m][r]   = iw[r][c][m][E];
        end else begin : g_elink
          assign iv[r][c][m][E] = ov[r][c+1][m][W];
          assign ip[r][c][m][E] = op[r][c+1][m][W];
          assign ow[r][c+1][m][W] = iw[r][c][m][E];
        end
      end
    end
  end

  // chip-wide synchronization lines
  assign wand_all = &wand_v;
  assign mbkpt    = |mbkpt_v;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_irq <= 1'b0;
      wand_q   <= 1'b0;
      wand_irq <= 1'b0;
    end else begin
      sync_irq <= |sync_v;
      wand_q   <= wand_all;
      wand_irq <= wand_all && !wand_q;
    end
  end
endmodule
