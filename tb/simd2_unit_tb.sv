// simd2_unit_tb: the 4x4 SIMD^2 array. Streams random rows (one per cycle, back to back) for
// every ALU opcode pair of the nine instructions and checks each output row against
//   d[j] = C[j] (+) (a[0] (x) B[0][j]) (+) ... (+) (a[3] (x) B[3][j])  (folded in k order)
// Operands are finite or +inf (see rand_h_pinf),
// and checks that every row appears exactly one cycle after it entered, whatever the opcode.
module simd2_unit_tb;
  import simd2_pkg::*;
  import simd2_ref_pkg::*;

  localparam int N = 4;
  int checks = 0, failures = 0;

  logic        clk = 0, rst_n = 0;
  logic        in_valid;
  oplus_op_e   oplus_op;
  otimes_op_e  otimes_op;
  logic [15:0] a_row [N];
  logic [15:0] b_tile [N][N];
  logic [31:0] c_row [N];
  logic        out_valid;
  logic [31:0] d_row [N];

  simd2_unit #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  // expected rows, in order
  logic [31:0] exp_mem [512][N];
  int          in_cyc  [512];
  int          wp = 0, rp = 0;
  int          cyc = 0;
  always @(posedge clk) cyc++;

  function automatic void expect_row();
    logic [31:0] e [N];
    for (int j = 0; j < N; j++) begin
      e[j] = c_row[j];
      for (int k = 0; k < N; k++)
        e[j] = ref_oplus(oplus_op, e[j], ref_otimes(otimes_op, a_row[k], b_tile[k][j]));
    end
    exp_mem[wp] = e;
    in_cyc[wp] = cyc;
    wp++;
  endfunction

  always @(negedge clk) if (rst_n && out_valid) begin
    logic [31:0] e [N];
    int c0;
    if (rp == wp) begin
      failures++; $display("FAIL unexpected output");
    end else begin
      e = exp_mem[rp];
      c0 = in_cyc[rp];
      rp++;
      checks++;
      if (cyc - c0 != 1) begin failures++; $display("FAIL latency %0d", cyc - c0); end
      for (int j = 0; j < N; j++) begin
        checks++;
        if (d_row[j] !== e[j]) begin
          failures++;
          if (failures < 10) $display("FAIL col %0d got %h exp %h", j, d_row[j], e[j]);
        end
      end
    end
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; oplus_op = OP_ADD; otimes_op = OT_MUL;
    for (int k = 0; k < N; k++) begin
      a_row[k] = '0; c_row[k] = '0;
      for (int j = 0; j < N; j++) b_tile[k][j] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 9 * 40; n++) begin
      simd2_opcode_e opc;
      @(negedge clk);
      opc = simd2_opcode_e'(n % 9);
      in_valid  = ($urandom_range(3) != 0);
      oplus_op  = ref_oplus_of(opc);
      otimes_op = ref_otimes_of(opc);
      for (int k = 0; k < N; k++) begin
        a_row[k] = rand_h_pinf();
        c_row[k] = h2f(rand_h_pinf());
        for (int j = 0; j < N; j++) b_tile[k][j] = rand_h_pinf();
      end
      if (in_valid) expect_row();
    end
    @(negedge clk);
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (rp != wp) begin failures++; $display("FAIL %0d rows missing", wp - rp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
