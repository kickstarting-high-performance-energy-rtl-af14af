// fpu: the eCore's IEEE-754 single-precision floating-point unit.
//
// Operations (op): FADD a+b, FSUB a-b, FMUL a*b, FMADD c+a*b, FMSUB c-a*b,
// FIX (float to int32), FLOAT (int32 to float), FABS. Two rounding modes:
// round to nearest even (rm=0) and truncate toward zero (rm=1). FMADD/FMSUB
// round the product and then the sum (not fused). Subnormal operands are read
// as zero and results below the normal range are flushed to a signed zero.
// A NaN operand or an invalid operation (inf-inf, inf*0, FIX out of range)
// gives the quiet NaN 0x7FC00000 (FIX saturates instead) and raises inv; ovf
// and unf report overflow and flush-to-zero. bn/bz are the result's sign and
// zero flags; the core keeps inv/ovf/unf as sticky status bits.
//
// Timing: start samples op/rm/operands; the result is computed in the first
// cycle and then held in a short pipeline so that done rises 2 cycles after
// start in truncate mode (the E3 stage when start is E1) and 3 cycles after
// start in round-to-nearest mode (E4). One new operation may start per cycle
// as long as consecutive operations use the same rounding mode. The operation
// list, the flags and the E3/E4 completion follow the architecture; which mode
// takes E4, the flush-to-zero handling and the unfused multiply-add are choices
// of this design.
module fpu (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [2:0]  op,
  input  logic        rm,
  input  logic [31:0] a, b, c,
  output logic        done,
  output logic [31:0] y,
  output logic        bn, bz,
  output logic        inv, ovf, unf
);
  localparam logic [2:0] OP_FADD = 3'd0, OP_FSUB = 3'd1, OP_FMUL = 3'd2, OP_FMADD = 3'd3,
                         OP_FMSUB = 3'd4, OP_FIX = 3'd5, OP_FLOAT = 3'd6, OP_FABS = 3'd7;
  localparam logic [31:0] QNAN = 32'h7FC00000;

  typedef struct packed {
    logic [31:0] y;
    logic inv, ovf, unf;
  } fres_t;

  function automatic logic is_nan(logic [31:0] x);
    return x[30:23] == 8'hFF && x[22:0] != '0;
  endfunction
  function automatic logic is_inf(logic [31:0] x);
    return x[30:23] == 8'hFF && x[22:0] == '0;
  endfunction
  function automatic logic is_zero(logic [31:0] x);   // subnormals count as zero
    return x[30:23] == 8'h00;
  endfunction

  // Round and pack: sig[26] is the leading one, [2:0] guard/round/sticky.
  function automatic fres_t round_pack(logic s, logic signed [11:0] e, logic [26:0] sig, logic trunc);
    fres_t r;
    logic [24:0] m;
    logic inc;
    r = '0;
    inc = !trunc && sig[2] && (sig[1] || sig[0] || sig[3]);
    m = {1'b0, sig[26:3]} + 25'(inc);
    if (m[24]) begin
      m = m >> 1;
      e = e + 12'sd1;
    end
    if (e >= 12'sd255) begin
      r.ovf = 1'b1;
      r.y   = trunc ? {s, 31'h7F7FFFFF} : {s, 8'hFF, 23'd0};
    end else if (e <= 12'sd0) begin
      r.unf = 1'b1;
      r.y   = {s, 31'd0};
    end else begin
      r.y = {s, e[7:0], m[22:0]};
    end
    return r;
  endfunction

  function automatic fres_t f_add(logic [31:0] x, logic [31:0] z, logic trunc);
    fres_t r;
    logic [31:0] big, sml;
    logic [26:0] ab, bb;
    logic [27:0] sum;
    logic [7:0]  d;
    logic signed [11:0] e;
    logic st;
    int sh;
    r = '0;
    if (is_nan(x) || is_nan(z) || (is_inf(x) && is_inf(z) && x[31] != z[31])) begin
      r.y = QNAN; r.inv = 1'b1;
    end else if (is_inf(x)) r.y = x;
    else if (is_inf(z))     r.y = z;
    else if (is_zero(x) && is_zero(z)) r.y = {x[31] & z[31], 31'd0};
    else if (is_zero(x))    r.y = z;
    else if (is_zero(z))    r.y = x;
    else begin
      if (x[30:0] >= z[30:0]) begin big = x; sml = z; end
      else                    begin big = z; sml = x; end
      d  = big[30:23] - sml[30:23];
      ab = {1'b1, big[22:0], 3'b000};
      bb = {1'b1, sml[22:0], 3'b000};
      st = 1'b0;
      for (int k = 0; k < 27; k++)
        if (k < int'(d) && bb[k]) st = 1'b1;
      bb = (d > 8'd26) ? 27'd0 : (bb >> d);
      bb[0] = bb[0] | st;
      e = 12'(big[30:23]);
      if (big[31] == sml[31]) sum = {1'b0, ab} + {1'b0, bb};
      else                    sum = {1'b0, ab} - {1'b0, bb};
      if (sum == '0) r.y = '0;
      else begin
        if (sum[27]) begin
          sum = {1'b0, sum[27:2], sum[1] | sum[0]};
          e = e + 12'sd1;
        end else begin
          sh = 0;
          for (int k = 26; k >= 0; k--)
            if (sum[k] && sh == 0) sh = 27 - k;
          sh = sh - 1;
          sum = sum << sh;
          e = e - 12'(sh);
        end
        r = round_pack(big[31], e, sum[26:0], trunc);
      end
    end
    return r;
  endfunction

  function automatic fres_t f_mul(logic [31:0] x, logic [31:0] z, logic trunc);
    fres_t r;
    logic [47:0] p;
    logic signed [11:0] e;
    logic s;
    r = '0;
    s = x[31] ^ z[31];
    if (is_nan(x) || is_nan(z) || (is_inf(x) && is_zero(z)) || (is_zero(x) && is_inf(z))) begin
      r.y = QNAN; r.inv = 1'b1;
    end else if (is_inf(x) || is_inf(z)) r.y = {s, 8'hFF, 23'd0};
    else if (is_zero(x) || is_zero(z))   r.y = {s, 31'd0};
    else begin
      p = {24'd0, 1'b1, x[22:0]} * {24'd0, 1'b1, z[22:0]};
      e = 12'(x[30:23]) + 12'(z[30:23]) - 12'sd127;
      if (p[47]) e = e + 12'sd1;
      else       p = p << 1;
      r = round_pack(s, e, {p[47:22], |p[21:0]}, trunc);
    end
    return r;
  endfunction

  function automatic fres_t f_float(logic [31:0] x, logic trunc);
    fres_t r;
    logic [31:0] m;
    int sh;
    r = '0;
    m = x[31] ? (~x + 32'd1) : x;
    if (m == '0) r.y = '0;
    else begin
      sh = 0;
      for (int k = 0; k < 32; k++) if (m[k]) sh = 31 - k;
      m = m << sh;
      r = round_pack(x[31], 12'sd158 - 12'(sh), {m[31:6], |m[5:0]}, trunc);
    end
    return r;
  endfunction

  function automatic fres_t f_fix(logic [31:0] x, logic trunc);
    fres_t r;
    logic [55:0] m;   // integer part [55:24], guard [23], rest below
    logic [32:0] v;
    logic inc;
    int e;
    r = '0;
    e = int'(x[30:23]);
    if (is_nan(x)) begin
      r.y = 32'h7FFFFFFF; r.inv = 1'b1;
    end else if (is_zero(x) || e < 126 - 1) begin
      r.y = '0;
    end else if (e >= 158 && !(x == 32'hCF000000)) begin
      r.y = x[31] ? 32'h80000000 : 32'h7FFFFFFF; r.inv = 1'b1;
    end else begin
      // value = 1.f * 2^(e-127); place the binary point at bit 24
      m = {32'd0, 1'b1, x[22:0]};          // 1.f with point at bit 23
      m = m << 1;                          // point at bit 24
      if (e >= 127) m = m << (e - 127);
      else          m = m >> (127 - e);
      inc = !trunc && m[23] && ((|m[22:0]) || m[24]);
      v = {1'b0, m[55:24]} + 33'(inc);
      if (x[31]) v = ~v + 33'd1;
      if (!x[31] && v[31]) begin
        r.y = 32'h7FFFFFFF; r.inv = 1'b1;
      end else r.y = v[31:0];
    end
    return r;
  endfunction

  fres_t res_c;
  always_comb begin
    fres_t t;
    t = '0;
    unique case (op)
      OP_FADD:  res_c = f_add(a, b, rm);
      OP_FSUB:  res_c = f_add(a, {~b[31], b[30:0]}, rm);
      OP_FMUL:  res_c = f_mul(a, b, rm);
      OP_FMADD: begin
        t = f_mul(a, b, rm);
        res_c = f_add(c, t.y, rm);
        res_c.inv |= t.inv; res_c.ovf |= t.ovf; res_c.unf |= t.unf;
      end
      OP_FMSUB: begin
        t = f_mul(a, b, rm);
        res_c = f_add(c, {~t.y[31], t.y[30:0]}, rm);
        res_c.inv |= t.inv; res_c.ovf |= t.ovf; res_c.unf |= t.unf;
      end
      OP_FIX:   res_c = f_fix(a, rm);
      OP_FLOAT: res_c = f_float(a, rm);
      default: begin
        res_c = '0;
        res_c.y = is_nan(a) ? QNAN : {1'b0, a[30:0]};
        res_c.inv = is_nan(a);
      end
    endcase
  end

  // Result pipeline.
  fres_t [2:0] st_q;
  logic  [2:0] v_q, rm_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q <= '0; v_q <= '0; rm_q <= '0;
    end else begin
      st_q <= {st_q[1:0], res_c};
      v_q  <= {v_q[1:0], start};
      rm_q <= {rm_q[1:0], rm};
    end
  end

  fres_t      out;
  logic [2:0] fix_pipe_q;
  logic       fix_sel;
  always_comb begin
    if (v_q[1] && rm_q[1]) begin
      done = 1'b1; out = st_q[1];
    end else if (v_q[2] && !rm_q[2]) begin
      done = 1'b1; out = st_q[2];
    end else begin
      done = 1'b0; out = '0;
    end
    y   = out.y;
    inv = out.inv;
    ovf = out.ovf;
    unf = out.unf;
    bn  = done && out.y[31];
    bz  = done && (fix_sel ? (out.y == '0) : (out.y[30:0] == '0));
  end

  // FIX returns an integer: its zero test must see all 32 bits.
  assign fix_sel = (v_q[1] && rm_q[1]) ? fix_pipe_q[1] : fix_pipe_q[2];
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) fix_pipe_q <= '0;
    else        fix_pipe_q <= {fix_pipe_q[1:0], op == OP_FIX};

endmodule
