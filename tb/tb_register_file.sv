// tb_register_file: writes through all three write ports and reads back
// through all read ports, against a model array; checks the 64-bit pair
// access and the write-collision priority.
module tb_register_file;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [5:0] f_ra, f_rb, f_rc, f_wa, i_ra, i_rb, i_wa, ls_ra, ls_wa;
  logic [31:0] f_a, f_b, f_c, f_wd, i_a, i_b, i_wd;
  logic f_we, i_we;
  logic [1:0] ls_we;
  logic [63:0] ls_rd, ls_wd;
  logic [31:0] model [64];
  register_file dut (.*);
  always #5 clk = ~clk;

  task automatic chk(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s got %h exp %h", what, got, exp); end
  endtask

  initial begin
    {f_we, i_we, ls_we} = '0;
    {f_ra, f_rb, f_rc, f_wa, i_ra, i_rb, i_wa, ls_ra, ls_wa} = '0;
    f_wd = 0; i_wd = 0; ls_wd = 0;
    for (int k = 0; k < 64; k++) model[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      f_we = $urandom_range(0,1); f_wa = 6'($urandom); f_wd = $urandom;
      i_we = $urandom_range(0,1); i_wa = 6'($urandom); i_wd = $urandom;
      ls_we = 2'($urandom); ls_wa = 6'($urandom); ls_wd = {$urandom, $urandom};
      @(posedge clk);
      if (f_we) model[f_wa] = f_wd;
      if (i_we) model[i_wa] = i_wd;
      if (ls_we[0]) model[ls_wa] = ls_wd[31:0];
      if (ls_we[1]) model[{ls_wa[5:1], 1'b1}] = ls_wd[63:32];
      @(negedge clk);
      f_we = 0; i_we = 0; ls_we = 0;
      f_ra = 6'($urandom); f_rb = 6'($urandom); f_rc = 6'($urandom);
      i_ra = 6'($urandom); i_rb = 6'($urandom); ls_ra = 6'($urandom);
      #1;
      chk("f_a", f_a, model[f_ra]); chk("f_b", f_b, model[f_rb]); chk("f_c", f_c, model[f_rc]);
      chk("i_a", i_a, model[i_ra]); chk("i_b", i_b, model[i_rb]);
      chk("ls", ls_rd, {model[{ls_ra[5:1],1'b1}], model[{ls_ra[5:1],1'b0}]});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
