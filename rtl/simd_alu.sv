// simd_alu: the MAC/ALU of the CAL unit, SIMD lanes of DW-bit integers.
//
// Every lane computes the same operation: ADD a+b, SUB a-b, MUL a*b, MAX, MIN, and
// MADD a*b+c (c is the old value of the destination, read through operand port 2).
// Results wrap to DW bits; MAX and MIN compare as signed two's complement. Other opcodes
// give zero. Purely combinational.
// The operation set and the SIMD-8 x 16-bit shape are the paper's; the integer number
// format and wrap-around are this design's choice (the paper only says "16-bit accuracy").
module simd_alu
  import rnn_pkg::*;
#(
  parameter int LANES = 8,
  parameter int LW    = 16
) (
  input  logic [3:0]          op,
  input  logic [LANES*LW-1:0] a,
  input  logic [LANES*LW-1:0] b,
  input  logic [LANES*LW-1:0] c,
  output logic [LANES*LW-1:0] y
);
  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [LW-1:0] x0, x1, x2;
      logic [LW-1:0] prod;   // low half of the product is sign-independent
      x0 = a[l*LW +: LW];
      x1 = b[l*LW +: LW];
      x2 = c[l*LW +: LW];
      prod = x0 * x1;
      unique case (op)
        OP_ADD:  y[l*LW +: LW] = x0 + x1;
        OP_SUB:  y[l*LW +: LW] = x0 - x1;
        OP_MUL:  y[l*LW +: LW] = prod;
        OP_MAX:  y[l*LW +: LW] = (x0 > x1) ? x0 : x1;
        OP_MIN:  y[l*LW +: LW] = (x0 < x1) ? x0 : x1;
        OP_MADD: y[l*LW +: LW] = prod + x2;
        default: y[l*LW +: LW] = '0;
      endcase
    end
  end
endmodule
