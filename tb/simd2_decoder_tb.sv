// simd2_decoder_tb: checks every opcode against the instruction table ((+), (x) per
// instruction) and that load/store opcodes are not decoded as arithmetic.
module simd2_decoder_tb;
  import simd2_pkg::*;
  import simd2_ref_pkg::*;

  int checks = 0, failures = 0;
  simd2_opcode_e opcode;
  logic          is_arith;
  oplus_op_e     oplus_op;
  otimes_op_e    otimes_op;

  simd2_decoder dut (.opcode, .is_arith, .oplus_op, .otimes_op);

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      opcode = simd2_opcode_e'(i);
      #1;
      checks++;
      if (is_arith !== (i < 9)) begin
        failures++; $display("FAIL is_arith opcode %0d", i);
      end
      if (i < 9) begin
        checks += 2;
        if (oplus_op !== ref_oplus_of(opcode)) begin
          failures++; $display("FAIL oplus opcode %0d: %s", i, oplus_op.name());
        end
        if (otimes_op !== ref_otimes_of(opcode)) begin
          failures++; $display("FAIL otimes opcode %0d: %s", i, otimes_op.name());
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
