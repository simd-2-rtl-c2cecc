// otimes_alu_tb: self-checking test of the (x) ALU.
// Directed cases (exact products, inf, zero, and/L2 semantics) then random fp16 operands for
// every operation, compared with double-precision reference arithmetic rounded to fp32.
module otimes_alu_tb;
  import simd2_pkg::*;
  import simd2_ref_pkg::*;

  int checks = 0, failures = 0;
  otimes_op_e  op;
  logic [15:0] a, b;
  logic [31:0] y;

  otimes_alu dut (.op, .a, .b, .y);

  task automatic check(input otimes_op_e o, input logic [15:0] x, input logic [15:0] z,
                       input logic [31:0] exp);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL op=%s a=%h b=%h y=%h exp=%h", o.name(), x, z, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // directed: 1.5 * 2.0 = 3.0; 1.5 + 2.0 = 3.5; min/max; and; (3-1)^2 = 4
    check(OT_MUL, 16'h3e00, 16'h4000, 32'h4040_0000);
    check(OT_ADD, 16'h3e00, 16'h4000, 32'h4060_0000);
    check(OT_MIN, 16'h3e00, 16'hc000, 32'hc000_0000);
    check(OT_MAX, 16'h3e00, 16'hc000, 32'h3fc0_0000);
    check(OT_AND, 16'h3e00, 16'h0000, 32'h0000_0000);
    check(OT_AND, 16'h3c00, 16'h3c00, 32'h3f80_0000);
    check(OT_L2,  16'h4200, 16'h3c00, 32'h4080_0000);
    check(OT_ADD, 16'h7c00, 16'h3c00, 32'h7f80_0000);  // inf + 1 = inf (min-plus "no edge")
    check(OT_MUL, 16'h7c00, 16'h0000, FP32_QNAN);       // inf * 0 = NaN
    check(OT_MUL, 16'h0001, 16'h3c00, 32'h3380_0000);  // fp16 subnormal 2^-24 widened exactly
    for (int n = 0; n < 3000; n++) begin
      logic [15:0] x, z;
      otimes_op_e o;
      x = rand_h(); z = rand_h();
      o = otimes_op_e'($urandom_range(5));
      check(o, x, z, ref_otimes(o, x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
