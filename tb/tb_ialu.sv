// tb_ialu: random and corner-case check of the integer ALU against a
// reference written with plain SystemVerilog arithmetic.
module tb_ialu;
  int checks = 0, failures = 0;
  logic [3:0]  op;
  logic [31:0] a, b, y;
  logic        an, az, av, ac;
  ialu dut (.*);

  task automatic check(logic [3:0] o, logic [31:0] x, logic [31:0] z);
    logic [31:0] ey; logic [32:0] s; logic ev, ec;
    op = o; a = x; b = z;
    #1;
    ev = 0; ec = 0;
    case (o)
      0: begin s = {1'b0,x} + {1'b0,z}; ey = s[31:0]; ec = s[32];
               ev = ($signed(x) > 0 && $signed(z) > 0 && $signed(ey) < 0) ||
                    ($signed(x) < 0 && $signed(z) < 0 && $signed(ey) >= 0); end
      1: begin ey = x - z; ec = (x >= z);
               ev = (longint'($signed(x)) - longint'($signed(z))) != longint'($signed(ey)); end
      2: ey = x << z[4:0];
      3: ey = x >> z[4:0];
      4: ey = $signed(x) >>> z[4:0];
      5: ey = x ^ z;
      6: ey = x | z;
      7: ey = x & z;
      default: for (int k = 0; k < 32; k++) ey[k] = x[31-k];
    endcase
    checks++;
    if (y !== ey || an !== ey[31] || az !== (ey == 0) || av !== ev || ac !== ec) begin
      failures++;
      $display("FAIL op=%0d a=%h b=%h y=%h exp=%h flags=%b%b%b%b exp_v=%b exp_c=%b", o, x, z, y, ey, an, az, av, ac, ev, ec);
    end
  endtask

  initial begin
    check(0, 32'h7fffffff, 1);
    check(0, 32'hffffffff, 1);
    check(1, 32'h80000000, 1);
    check(1, 5, 5);
    check(1, 3, 5);
    check(8, 32'h00000001, 0);
    for (int i = 0; i < 3000; i++) check(4'($urandom_range(0, 8)), $urandom, $urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
