// simd2_mmo_seq_tb: one 16x16x16 instruction per opcode on the sequencer + 4x4 unit.
// The testbench plays the register file: it holds A, B, C and the destination D, applies the
// row-segment writes, and afterwards compares D with the reference
//   D[i][j] = C[i][j] (+) (A[i][0] (x) B[0][j]) (+) ... (+) (A[i][15] (x) B[15][j]).
// It also checks the start-to-done time, (16/4)^3 * 4 + 1 = 257 cycles, for every opcode,
// and one run with D aliased onto C.
module simd2_mmo_seq_tb;
  import simd2_pkg::*;
  import simd2_ref_pkg::*;

  localparam int F = 16, N = 4;
  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0, start = 0;
  oplus_op_e   oplus_op;
  otimes_op_e  otimes_op;
  logic [15:0] a_frag [F][F];
  logic [15:0] b_frag [F][F];
  logic [31:0] c_frag [F][F];
  logic [31:0] p_frag [F][F];
  logic        wr_en;
  logic [3:0]  wr_row, wr_col;
  logic [31:0] wr_data [N];
  logic        busy, done;
  bit          alias_c;   // when set, C reads the destination (rd == rc)

  logic [31:0] c_init [F][F];

  simd2_mmo_seq #(.FRAG(F), .N(N)) dut (
    .clk, .rst_n, .start, .oplus_op, .otimes_op, .a_frag, .b_frag,
    .c_frag, .p_frag, .wr_en, .wr_row, .wr_col, .wr_data, .busy, .done);

  always #5 clk = ~clk;

  always @(posedge clk) if (wr_en)
    for (int j = 0; j < N; j++) p_frag[wr_row][32'(wr_col) + j] <= wr_data[j];

  always_comb c_frag = alias_c ? p_frag : c_init;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input simd2_opcode_e opc, input bit alias_mode);
    int t0, t1;
    logic [31:0] e;
    for (int i = 0; i < F; i++)
      for (int j = 0; j < F; j++) begin
        a_frag[i][j] = (opc == I_ORAND) ? 16'($urandom_range(1)) * 16'h3c00 : rand_h_mod();
        b_frag[i][j] = (opc == I_ORAND) ? 16'($urandom_range(3) == 0) * 16'h3c00 : rand_h_mod();
        c_init[i][j] = (opc == I_ORAND) ? 32'd0 : h2f(rand_h_mod());
        p_frag[i][j] = alias_mode ? c_init[i][j] : 32'hdead_beef;
      end
    alias_c = alias_mode;
    @(negedge clk);
    oplus_op = ref_oplus_of(opc); otimes_op = ref_otimes_of(opc);
    start = 1;
    t0 = $time / 10;
    @(negedge clk);
    start = 0;
    oplus_op = OP_ADD; otimes_op = OT_MUL;     // the sequencer must have latched the opcodes
    while (!done) @(negedge clk);
    t1 = $time / 10;
    checks++;
    if (t1 - t0 != 257) begin failures++; $display("FAIL %s took %0d cycles", opc.name(), t1 - t0); end
    @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL still busy"); end
    for (int i = 0; i < F; i++)
      for (int j = 0; j < F; j++) begin
        e = c_init[i][j];
        for (int k = 0; k < F; k++)
          e = ref_oplus(ref_oplus_of(opc), e, ref_otimes(ref_otimes_of(opc), a_frag[i][k], b_frag[k][j]));
        checks++;
        if (p_frag[i][j] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL %s D[%0d][%0d]=%h exp %h", opc.name(), i, j, p_frag[i][j], e);
        end
      end
  endtask

  initial begin
    alias_c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < 9; o++) run(simd2_opcode_e'(o), 1'b0);
    run(I_MINPLUS, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
