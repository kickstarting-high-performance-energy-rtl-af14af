// register_file: the eCore's 64-word, 32-bit general register file.
//
// It serves, in one cycle, the three operand reads and one result write of the
// FPU, the two operand reads and one result write of the integer ALU, and a
// 64-bit load/store transfer (a read of an even/odd register pair for a store,
// or a write of up to two registers for a load). Reads are combinational; writes
// take effect at the clock edge. When two write ports name the same register in
// one cycle the load/store port wins over the IALU, and the IALU over the FPU.
// The port set follows the architecture; the collision priority is a choice of
// this design. All registers reset to zero.
module register_file (
  input  logic        clk,
  input  logic        rst_n,
  // FPU: three reads, one write
  input  logic [5:0]  f_ra, f_rb, f_rc,
  output logic [31:0] f_a, f_b, f_c,
  input  logic        f_we,
  input  logic [5:0]  f_wa,
  input  logic [31:0] f_wd,
  // IALU: two reads, one write
  input  logic [5:0]  i_ra, i_rb,
  output logic [31:0] i_a, i_b,
  input  logic        i_we,
  input  logic [5:0]  i_wa,
  input  logic [31:0] i_wd,
  // load/store: 64-bit pair read, write of low and/or high register
  input  logic [5:0]  ls_ra,           // pair base (bit 0 ignored for the pair)
  output logic [63:0] ls_rd,           // {r[base|1], r[base&~1]}
  input  logic [1:0]  ls_we,           // [0]: write ls_wa, [1]: write ls_wa|1
  input  logic [5:0]  ls_wa,
  input  logic [63:0] ls_wd
);
  logic [31:0] r [64];

  assign f_a = r[f_ra];
  assign f_b = r[f_rb];
  assign f_c = r[f_rc];
  assign i_a = r[i_ra];
  assign i_b = r[i_rb];
  assign ls_rd = {r[{ls_ra[5:1], 1'b1}], r[{ls_ra[5:1], 1'b0}]};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 64; k++) r[k] <= '0;
    end else begin
      if (f_we) r[f_wa] <= f_wd;
      if (i_we) r[i_wa] <= i_wd;
      if (ls_we[0]) r[ls_wa] <= ls_wd[31:0];
      if (ls_we[1]) r[{ls_wa[5:1], 1'b1}] <= ls_wd[63:32];
    end
  end
endmodule
