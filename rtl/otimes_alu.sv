// otimes_alu: the (x) ALU of one SIMD^2 processing element (paper Fig. 4, top).
//
// Takes two fp16 matrix elements and an operation code and returns an fp32 result:
//   OT_MUL a*b, OT_ADD a+b, OT_MIN min(a,b), OT_MAX max(a,b), OT_AND (a!=0 && b!=0) as 1.0/0.0,
//   OT_L2 (a-b)^2.
// Following Fig. 4, the sub-units are grouped as Mul, Min/Max, Add/And and L2 Dist, with a
// multiplexer selected by the op code. The operands are first widened exactly to fp32
// (fp16 in, fp32 out follows the instruction set). L2 distance reuses the adder (with B
// negated) and the multiplier (squaring the difference), so the ALU holds one fp32 adder,
// one fp32 multiplier and one comparator; that sharing is this design's choice.
// Purely combinational.
module otimes_alu
  import simd2_pkg::*;
(
  input  otimes_op_e  op,
  input  logic [15:0] a,     // fp16
  input  logic [15:0] b,     // fp16
  output logic [31:0] y      // fp32
);

  logic [31:0] af, bf, add_b, sum, mul_a, mul_b, prod;
  logic        a_lt_b;

  assign af = fp16_to_fp32(a);
  assign bf = fp16_to_fp32(b);

  // Add/And and L2 Dist share the adder: L2 subtracts.
  assign add_b = (op == OT_L2) ? {~bf[31], bf[30:0]} : bf;
  fp32_add u_add (.a(af), .b(add_b), .y(sum));

  // Mul and L2 Dist share the multiplier: L2 squares the difference.
  assign mul_a = (op == OT_L2) ? sum : af;
  assign mul_b = (op == OT_L2) ? sum : bf;
  fp32_mul u_mul (.a(mul_a), .b(mul_b), .y(prod));

  assign a_lt_b = fp32_lt(af, bf);

  always_comb begin
    unique case (op)
      OT_MUL:  y = prod;
      OT_ADD:  y = sum;
      OT_MIN:  y = a_lt_b ? af : bf;
      OT_MAX:  y = a_lt_b ? bf : af;
      OT_AND:  y = (fp32_true(af) && fp32_true(bf)) ? FP32_ONE : 32'd0;
      OT_L2:   y = prod;
      default: y = FP32_QNAN;
    endcase
  end

endmodule
