// ialu: the eCore's integer arithmetic logic unit (combinational).
//
// Operations: ADD, SUB, LSL, LSR, ASR, EOR, ORR, AND and BITR (bit reversal of
// operand a). It returns the result and the four integer flags: AN (result
// negative), AZ (result zero), AV (signed overflow of ADD/SUB) and AC (carry out
// of ADD, no-borrow of SUB, i.e. a >= b unsigned). Shifts use b[4:0]. Logic ops
// and shifts clear AV and AC. The operation list and the flag names follow the
// architecture; the exact flag rules for shifts and logic are this design's.
module ialu
  import epiphany_pkg::*;
(
  input  logic [3:0]  op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y,
  output logic        an, az, av, ac
);
  typedef enum logic [3:0] {
    OP_ADD = 4'd0, OP_SUB = 4'd1, OP_LSL = 4'd2, OP_LSR = 4'd3, OP_ASR = 4'd4,
    OP_EOR = 4'd5, OP_ORR = 4'd6, OP_AND = 4'd7, OP_BITR = 4'd8
  } ialu_op_e;

  logic [32:0] sum;
  always_comb begin
    sum = '0;
    av  = 1'b0;
    ac  = 1'b0;
    unique case (ialu_op_e'(op))
      OP_ADD: begin
        sum = {1'b0, a} + {1'b0, b};
        y   = sum[31:0];
        ac  = sum[32];
        av  = (a[31] == b[31]) && (y[31] != a[31]);
      end
      OP_SUB: begin
        sum = {1'b0, a} + {1'b0, ~b} + 33'd1;
        y   = sum[31:0];
        ac  = sum[32];
        av  = (a[31] != b[31]) && (y[31] != a[31]);
      end
      OP_LSL:  y = a << b[4:0];
      OP_LSR:  y = a >> b[4:0];
      OP_ASR:  y = $signed(a) >>> b[4:0];
      OP_EOR:  y = a ^ b;
      OP_ORR:  y = a | b;
      OP_AND:  y = a & b;
      OP_BITR: for (int k = 0; k < 32; k++) y[k] = a[31-k];
      default: y = '0;
    endcase
    an = y[31];
    az = (y == '0);
  end
endmodule
