// simd2_unit: the SIMD^2 unit datapath, an N x N array of (x)/(+) ALU pairs (paper Fig. 3(c)).
//
// Row k of the array sits on a broadcast bus carrying element A[i][k] of the current A row
// (from the register file); the processing element in row k, column j computes
// A[i][k] (x) B[k][j]. Column j is a reduction chain running down the array: the partial
// result enters at the top as C[i][j] and every row folds its (x) output in with the (+) ALU,
//   d[j] = ((((C[i][j] (+) p0j) (+) p1j) (+) p2j) (+) p3j),
// so one cycle yields one full row of D = C (+) (A (x) B) for an N x N x N tile.
// The array shape, the broadcast bus and the column reduction follow Fig. 3(c); the paper
// calls the column a reduction tree while the figure draws a chain, and the chain is used here
// (its order is also what makes min/max/or results independent of the order and the
// add results reproducible). Where C enters the column, and the single output register,
// are this design's choices.
//
// Timing: in_valid with a_row, b_tile, c_row and the ALU opcodes in cycle t gives
// out_valid with d_row in cycle t+1; a new row can enter every cycle. The latency is the same
// for every opcode, as the paper requires for all arithmetic instructions.
module simd2_unit
  import simd2_pkg::*;
#(
  parameter int unsigned N = 4    // array is N x N (paper: 4x4)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  oplus_op_e   oplus_op,
  input  otimes_op_e  otimes_op,
  input  logic [15:0] a_row  [N],       // fp16, a_row[k] is broadcast along array row k
  input  logic [15:0] b_tile [N][N],    // fp16, b_tile[k][j] feeds the element in row k, col j
  input  logic [31:0] c_row  [N],       // fp32, enters the top of each column
  output logic        out_valid,
  output logic [31:0] d_row  [N]        // fp32
);

  for (genvar j = 0; j < N; j++) begin : g_col
    for (genvar k = 0; k < N; k++) begin : g_row
      logic [31:0] prod;      // A[i][k] (x) B[k][j]
      logic [31:0] part_in;   // partial result from the element above (C at the top)
      logic [31:0] part_out;  // partial result passed down the column
      if (k == 0) begin : g_top
        assign part_in = c_row[j];
      end else begin : g_mid
        assign part_in = g_col[j].g_row[k-1].part_out;
      end
      otimes_alu u_ot (.op(otimes_op), .a(a_row[k]), .b(b_tile[k][j]), .y(prod));
      oplus_alu  u_op (.op(oplus_op),  .a(part_in), .b(prod), .y(part_out));
    end
  end

  logic [31:0] col_out [N];
  for (genvar j = 0; j < N; j++) begin : g_out
    assign col_out[j] = g_col[j].g_row[N-1].part_out;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < N; j++) d_row[j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int j = 0; j < N; j++) d_row[j] <= col_out[j];
    end
  end

endmodule
