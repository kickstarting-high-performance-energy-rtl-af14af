// tb_fpu: checks every FPU operation in both rounding modes against a
// reference built on double-precision arithmetic (exact for the operand
// ranges drawn here) followed by a separately written double-to-single
// rounding. Also checks special cases (NaN, infinities, overflow), the
// BN/BZ flags and the latency: done 2 cycles after start in truncate mode
// and 3 cycles in round-to-nearest mode.
module tb_fpu;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic start = 0, rm = 0;
  logic [2:0] op;
  logic [31:0] a, b, c, y;
  logic done, bn, bz, inv, ovf, unf;
  fpu dut (.*);
  always #5 clk = ~clk;

  function automatic real f2r(logic [31:0] x);
    if (x[30:23] == 0) return 0.0;
    return $bitstoreal({x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0});
  endfunction

  function automatic logic [31:0] r2f(real v, logic trunc);
    logic [63:0] d; int e; logic [23:0] m; logic [28:0] rem; logic [24:0] mm;
    d = $realtobits(v);
    if (d[62:0] == 0) return {d[63], 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:29]};
    rem = d[28:0];
    mm = {1'b0, m};
    if (!trunc && (rem > 29'h10000000 || (rem == 29'h10000000 && m[0]))) mm = mm + 1;
    if (mm[24]) begin mm = mm >> 1; e++; end
    if (e >= 255) return trunc ? {d[63], 31'h7F7FFFFF} : {d[63], 8'hFF, 23'd0};
    if (e <= 0) return {d[63], 31'd0};
    return {d[63], 8'(e), mm[22:0]};
  endfunction

  function automatic logic [31:0] rnd_float(int emin, int emax);
    return {1'($urandom), 8'($urandom_range(emin, emax)), 23'($urandom)};
  endfunction

  task automatic run(logic [2:0] o, logic mode, logic [31:0] x, logic [31:0] z, logic [31:0] w,
                     logic [31:0] exp_y, logic exp_inv = 0, logic exp_ovf = 0);
    int lat;
    @(negedge clk);
    op = o; rm = mode; a = x; b = z; c = w; start = 1;
    @(negedge clk);
    start = 0;
    lat = 1;
    while (!done && lat < 10) begin @(negedge clk); lat++; end
    checks++;
    if (y !== exp_y || inv !== exp_inv || ovf !== exp_ovf || bn !== exp_y[31] ||
        bz !== ((o == 5) ? (exp_y == 0) : (exp_y[30:0] == 0))) begin
      failures++;
      $display("FAIL op=%0d rm=%0d a=%h b=%h c=%h y=%h exp=%h inv=%b ovf=%b", o, mode, x, z, w, y, exp_y, inv, ovf);
    end
    checks++;
    if (lat != (mode ? 2 : 3)) begin
      failures++;
      $display("FAIL latency %0d in mode %0d", lat, mode);
    end
  endtask

  initial begin
    logic [31:0] x, z, w, t;
    real rx;
    int n, ea;
    a = 0; b = 0; c = 0; op = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      logic mode;
      mode = 1'($urandom);
      ea = $urandom_range(100, 150);
      x = rnd_float(ea, ea);
      z = rnd_float(ea - 20 < 1 ? 1 : ea - 20, ea + 20);
      w = rnd_float(ea, ea);
      run(0, mode, x, z, 0, r2f(f2r(x) + f2r(z), mode));
      run(1, mode, x, z, 0, r2f(f2r(x) - f2r(z), mode));
      run(2, mode, x, z, 0, r2f(f2r(x) * f2r(z), mode));
      t = r2f(f2r(x) * f2r(x), mode);
      w = rnd_float(int'(t[30:23]) - 15, int'(t[30:23]) + 15);
      run(3, mode, x, x, w, r2f(f2r(w) + f2r(t), mode));
      run(4, mode, x, x, w, r2f(f2r(w) - f2r(t), mode));
      // FIX on values within +-2^30
      x = rnd_float(120, 156);
      rx = f2r(x);
      n = $rtoi(rx);
      if (!mode) begin
        real fr;
        fr = rx - real'(n);
        if (fr > 0.5 || (fr == 0.5 && n[0])) n++;
        else if (fr < -0.5 || (fr == -0.5 && n[0])) n--;
      end
      run(5, mode, x, 0, 0, 32'(n));
      n = $urandom;
      run(6, mode, 32'(n), 0, 0, r2f(real'(n), mode));
      run(7, mode, x, 0, 0, {1'b0, x[30:0]});
    end
    // special cases
    run(0, 0, 32'h7F800000, 32'hFF800000, 0, 32'h7FC00000, 1);     // inf - inf
    run(2, 1, 32'h7F800000, 32'h00000000, 0, 32'h7FC00000, 1);     // inf * 0
    run(0, 0, 32'h7FC00001, 32'h3F800000, 0, 32'h7FC00000, 1);     // NaN operand
    run(2, 0, 32'h7F000000, 32'h7F000000, 0, 32'h7F800000, 0, 1);  // overflow to inf
    run(2, 1, 32'h7F000000, 32'h7F000000, 0, 32'h7F7FFFFF, 0, 1);  // overflow, truncate
    run(1, 0, 32'h3F800000, 32'h3F800000, 0, 32'h00000000);        // x - x = +0
    run(0, 0, 32'h3F800000, 32'h33800000, 0, 32'h3F800000);        // 1 + 2^-24: tie to even
    run(0, 0, 32'h3F800001, 32'h33800000, 0, 32'h3F800002);        // tie rounds up to even
    run(0, 1, 32'h3F800001, 32'h33800000, 0, 32'h3F800001);        // truncate
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
