// oplus_alu_tb: self-checking test of the (+) ALU.
// Directed cases, then random fp32 operands (finite, infinite and zero; no NaN) for add,
// subtract, min, max and or, compared with double-precision reference arithmetic.
module oplus_alu_tb;
  import simd2_pkg::*;
  import simd2_ref_pkg::*;

  int checks = 0, failures = 0;
  oplus_op_e   op;
  logic [31:0] a, b, y;

  oplus_alu dut (.op, .a, .b, .y);

  task automatic check(input oplus_op_e o, input logic [31:0] x, input logic [31:0] z,
                       input logic [31:0] exp);
    op = o; a = x; b = z;
    #1;
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL op=%s a=%h b=%h y=%h exp=%h", o.name(), x, z, y, exp);
    end
  endtask

  function automatic logic [31:0] rand_f(input bit near);
    logic [31:0] f;
    int unsigned sel;
    sel = $urandom_range(15);
    f = $urandom;
    if (sel == 0) f[30:0] = 31'h7f80_0000;
    else if (sel == 1) f[30:0] = 31'd0;
    else if (near) f[30:23] = 8'($urandom_range(140, 110));
    else f[30:23] = 8'($urandom_range(254, 1));
    return f;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(OP_ADD, 32'h3f80_0000, 32'h4000_0000, 32'h4040_0000);  // 1 + 2 = 3
    check(OP_SUB, 32'h3f80_0000, 32'h4000_0000, 32'hbf80_0000);  // 1 - 2 = -1
    check(OP_MIN, 32'h3f80_0000, 32'hff80_0000, 32'hff80_0000);  // min(1, -inf)
    check(OP_MAX, 32'h3f80_0000, 32'h7f80_0000, 32'h7f80_0000);  // max(1, inf)
    check(OP_OR,  32'h0000_0000, 32'h8000_0000, 32'h0000_0000);  // 0 or -0
    check(OP_OR,  32'h0000_0000, 32'h4000_0000, 32'h3f80_0000);
    check(OP_ADD, 32'h3f80_0000, 32'h3380_0000, 32'h3f80_0000);  // 1 + 2^-24: tie to even
    check(OP_ADD, 32'h3f80_0001, 32'h3380_0000, 32'h3f80_0002);  // tie rounds up to even
    check(OP_ADD, 32'h7f7f_ffff, 32'h7f7f_ffff, 32'h7f80_0000);  // overflow to inf
    for (int n = 0; n < 4000; n++) begin
      logic [31:0] x, z;
      oplus_op_e o;
      bit near;
      near = n[0];
      x = rand_f(near); z = rand_f(near);
      o = oplus_op_e'($urandom_range(4));
      check(o, x, z, ref_oplus(o, x, z));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
