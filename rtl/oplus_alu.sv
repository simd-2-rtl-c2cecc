// oplus_alu: the (+) ALU of one SIMD^2 processing element (paper Fig. 4, bottom).
//
// Combines two fp32 values: OP_ADD a+b, OP_SUB a-b, OP_MIN min(a,b), OP_MAX max(a,b),
// OP_OR (a!=0 || b!=0) as 1.0/0.0. Fig. 4 draws Add, Min/Max and Or sub-units behind a
// multiplexer; the text also lists subtract, which here reuses the adder with b negated.
// Operand a is the partial result arriving down the column, b the (x) ALU output.
// Purely combinational.
module oplus_alu
  import simd2_pkg::*;
(
  input  oplus_op_e   op,
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  logic [31:0] add_b, sum;
  logic        a_lt_b;

  assign add_b = (op == OP_SUB) ? {~b[31], b[30:0]} : b;
  fp32_add u_add (.a(a), .b(add_b), .y(sum));

  assign a_lt_b = fp32_lt(a, b);

  always_comb begin
    unique case (op)
      OP_ADD, OP_SUB: y = sum;
      OP_MIN:         y = a_lt_b ? a : b;
      OP_MAX:         y = a_lt_b ? b : a;
      OP_OR:          y = (fp32_true(a) || fp32_true(b)) ? FP32_ONE : 32'd0;
      default:        y = FP32_QNAN;
    endcase
  end

endmodule
