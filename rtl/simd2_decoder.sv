// simd2_decoder: configures the (+) and (x) ALUs from a SIMD^2 arithmetic opcode.
//
// The mapping is the instruction table of the paper:
//   mma +,x   minplus min,+   maxplus max,+   minmul min,x   maxmul max,x
//   minmax min,max   maxmin max,min   orand or,and   addnorm +,|a-b|^2
// is_arith flags the nine arithmetic opcodes; load/store opcodes decode to is_arith = 0.
// Purely combinational.
module simd2_decoder
  import simd2_pkg::*;
(
  input  simd2_opcode_e opcode,
  output logic          is_arith,
  output oplus_op_e     oplus_op,
  output otimes_op_e    otimes_op
);

  always_comb begin
    is_arith  = 1'b1;
    oplus_op  = OP_ADD;
    otimes_op = OT_MUL;
    unique case (opcode)
      I_MMA:     begin oplus_op = OP_ADD; otimes_op = OT_MUL; end
      I_MINPLUS: begin oplus_op = OP_MIN; otimes_op = OT_ADD; end
      I_MAXPLUS: begin oplus_op = OP_MAX; otimes_op = OT_ADD; end
      I_MINMUL:  begin oplus_op = OP_MIN; otimes_op = OT_MUL; end
      I_MAXMUL:  begin oplus_op = OP_MAX; otimes_op = OT_MUL; end
      I_MINMAX:  begin oplus_op = OP_MIN; otimes_op = OT_MAX; end
      I_MAXMIN:  begin oplus_op = OP_MAX; otimes_op = OT_MIN; end
      I_ORAND:   begin oplus_op = OP_OR;  otimes_op = OT_AND; end
      I_ADDNORM: begin oplus_op = OP_ADD; otimes_op = OT_L2;  end
      default:   is_arith = 1'b0;
    endcase
  end

endmodule
