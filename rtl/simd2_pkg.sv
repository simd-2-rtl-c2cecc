// simd2_pkg: types, opcodes and number-format helpers shared by the SIMD^2 blocks.
//
// The SIMD^2 unit computes D = C (+) (A (x) B) over 16x16 matrix fragments, where (+) and (x)
// are chosen per instruction from the nine semiring-like pairs of the instruction set (mma,
// minplus, maxplus, minmul, maxmul, minmax, maxmin, orand, addnorm). Inputs A and B are fp16,
// C and D are fp32, as in the instruction set. The binary encodings of the opcodes below are
// this design's own choice; the paper names the instructions but gives no encoding.
//
// Floating point conventions (this design's choice, the paper does not specify them):
//   * fp16 -> fp32 conversion is exact, fp16 subnormals included.
//   * fp32 add and multiply round to nearest even; fp32 subnormal inputs and results are
//     flushed to zero; any NaN result is the canonical quiet NaN 32'h7fc0_0000.
//   * min/max order the values by their numeric value with -0 < +0; NaN operands are not
//     treated specially (a NaN orders above +inf or below -inf, following its sign bit).
//   * "and"/"or" treat a value as true when it is not +-0 and return 1.0 or +0.0.
package simd2_pkg;

  localparam int unsigned FRAG_DIM  = 16;  // fragment shape of load/store/arithmetic (16x16)
  localparam int unsigned SMEM_AW   = 32;  // shared-memory byte address width

  localparam logic [31:0] FP32_ONE  = 32'h3f80_0000;
  localparam logic [31:0] FP32_QNAN = 32'h7fc0_0000;
  localparam logic [31:0] FP32_PINF = 32'h7f80_0000;

  // Operation of the (x) ALU (Fig. 4 top: Mul, Min/Max, Add/And, L2 Dist)
  typedef enum logic [2:0] {
    OT_MUL = 3'd0,
    OT_ADD = 3'd1,
    OT_MIN = 3'd2,
    OT_MAX = 3'd3,
    OT_AND = 3'd4,
    OT_L2  = 3'd5
  } otimes_op_e;

  // Operation of the (+) ALU (Fig. 4 bottom: Add, Min/Max, Or; text adds subtract)
  typedef enum logic [2:0] {
    OP_ADD = 3'd0,
    OP_SUB = 3'd1,
    OP_MIN = 3'd2,
    OP_MAX = 3'd3,
    OP_OR  = 3'd4
  } oplus_op_e;

  // Instruction opcodes: the nine arithmetic instructions, then load/store.
  typedef enum logic [3:0] {
    I_MMA      = 4'd0,
    I_MINPLUS  = 4'd1,
    I_MAXPLUS  = 4'd2,
    I_MINMUL   = 4'd3,
    I_MAXMUL   = 4'd4,
    I_MINMAX   = 4'd5,
    I_MAXMIN   = 4'd6,
    I_ORAND    = 4'd7,
    I_ADDNORM  = 4'd8,
    I_LOAD_H   = 4'd9,   // load a 16x16 fp16 fragment (matrix_a / matrix_b)
    I_LOAD_F   = 4'd10,  // load a 16x16 fp32 fragment (accumulator)
    I_STORE    = 4'd11   // store a 16x16 fp32 accumulator fragment
  } simd2_opcode_e;

  localparam int unsigned NUM_ARITH = 9;

  // One instruction as issued by the subcore front end.
  typedef struct packed {
    simd2_opcode_e      opcode;
    logic [2:0]         rd;    // fragment written (arith, loads) or stored (I_STORE); fp16
                               // file for I_LOAD_H, fp32 accumulator file otherwise
    logic [2:0]         ra;    // fp16 fragment A (arith)
    logic [2:0]         rb;    // fp16 fragment B (arith)
    logic [2:0]         rc;    // accumulator fragment C (arith)
    logic [SMEM_AW-1:0] addr;  // shared-memory byte address of element (0,0)
    logic [15:0]        ld;    // leading dimension in elements
  } simd2_instr_t;

  // Shared-memory request port (towards the LD/ST queue / MIO). One 32-bit word per request.
  typedef struct packed {
    logic               req;
    logic               we;
    logic [SMEM_AW-1:0] addr;   // byte address, 2-byte aligned for fp16, 4-byte for fp32
    logic [31:0]        wdata;
    logic [3:0]         be;
  } smem_req_t;

  // Exact fp16 -> fp32 conversion.
  function automatic logic [31:0] fp16_to_fp32(input logic [15:0] h);
    logic       s;
    logic [4:0] e;
    logic [9:0] m;
    logic [31:0] r;
    int         p;
    s = h[15]; e = h[14:10]; m = h[9:0];
    if (e == 5'd31) begin
      r = (m == 10'd0) ? {s, 8'hff, 23'd0} : {s, 8'hff, 1'b1, m, 12'd0};
    end else if (e == 5'd0) begin
      if (m == 10'd0) r = {s, 31'd0};
      else begin
        p = 0;
        for (int i = 0; i < 10; i++) if (m[i]) p = i;      // leading one position
        // value = m * 2^-24 = 1.f * 2^(p-24)
        r = {s, 8'(p - 24 + 127), 23'((23'(m) << (23 - p)))};
      end
    end else begin
      r = {s, 8'(32'(e) - 15 + 127), m, 13'd0};
    end
    return r;
  endfunction

  // Order key: unsigned comparison of keys equals numeric comparison of the floats.
  function automatic logic [31:0] fp32_key(input logic [31:0] x);
    return x[31] ? ~x : (x | 32'h8000_0000);
  endfunction

  function automatic logic fp32_lt(input logic [31:0] a, input logic [31:0] b);
    return fp32_key(a) < fp32_key(b);
  endfunction

  function automatic logic fp32_true(input logic [31:0] x);
    return x[30:0] != 31'd0;
  endfunction

endpackage
