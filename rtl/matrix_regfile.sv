// matrix_regfile: matrix-fragment storage of the subcore register file, as seen by SIMD^2.
//
// Holds NUM_H fp16 fragments (the A/B operands) and NUM_F fp32 fragments (accumulators C/D),
// each FRAG x FRAG. In the paper the fragments live in the ordinary GPU register file, spread
// over the threads of a warp; that distribution is not described, so this block is a plain
// fragment-addressed store with the ports the SIMD^2 datapath needs (this design's choice):
//   * whole-fragment read ports A, B (fp16) and C, D (fp32), combinational;
//   * one fp16 element write port and one fp32 element write port (loads);
//   * one fp32 row-segment write port of SEG elements (results of the SIMD^2 unit).
// Writes take effect at the rising clock edge. No reset: contents are data, and a fragment
// must be loaded or computed before it is read.
module matrix_regfile
  import simd2_pkg::*;
#(
  parameter int unsigned FRAG  = 16,  // fragment dimension (paper: 16x16)
  parameter int unsigned NUM_H = 4,   // fp16 fragments (assumed)
  parameter int unsigned NUM_F = 4,   // fp32 fragments (assumed)
  parameter int unsigned SEG   = 4    // row-segment write width = SIMD^2 unit width
) (
  input  logic                     clk,
  // fp16 element write
  input  logic                     h_we,
  input  logic [2:0]               h_idx,
  input  logic [$clog2(FRAG)-1:0]  h_row,
  input  logic [$clog2(FRAG)-1:0]  h_col,
  input  logic [15:0]              h_wdata,
  // fp32 element write
  input  logic                     f_we,
  input  logic [2:0]               f_idx,
  input  logic [$clog2(FRAG)-1:0]  f_row,
  input  logic [$clog2(FRAG)-1:0]  f_col,
  input  logic [31:0]              f_wdata,
  // fp32 row-segment write: elements [s_col, s_col+SEG) of row s_row
  input  logic                     s_we,
  input  logic [2:0]               s_idx,
  input  logic [$clog2(FRAG)-1:0]  s_row,
  input  logic [$clog2(FRAG)-1:0]  s_col,
  input  logic [31:0]              s_wdata [SEG],
  // whole-fragment reads
  input  logic [2:0]               a_idx,
  input  logic [2:0]               b_idx,
  input  logic [2:0]               c_idx,
  input  logic [2:0]               d_idx,
  output logic [15:0]              a_frag [FRAG][FRAG],
  output logic [15:0]              b_frag [FRAG][FRAG],
  output logic [31:0]              c_frag [FRAG][FRAG],
  output logic [31:0]              d_frag [FRAG][FRAG]
);

  localparam int unsigned HW = (NUM_H > 1) ? $clog2(NUM_H) : 1;
  localparam int unsigned FX = (NUM_F > 1) ? $clog2(NUM_F) : 1;

  logic [15:0] hreg [NUM_H][FRAG][FRAG];
  logic [31:0] freg [NUM_F][FRAG][FRAG];

  always_ff @(posedge clk) begin
    if (h_we && (32'(h_idx) < NUM_H)) hreg[HW'(h_idx)][h_row][h_col] <= h_wdata;
    if (f_we && (32'(f_idx) < NUM_F)) freg[FX'(f_idx)][f_row][f_col] <= f_wdata;
    if (s_we && (32'(s_idx) < NUM_F))
      for (int j = 0; j < SEG; j++) freg[FX'(s_idx)][s_row][32'(s_col) + j] <= s_wdata[j];
  end

  // Out-of-range indices read fragment 0.
  always_comb begin
    a_frag = hreg[(32'(a_idx) < NUM_H) ? HW'(a_idx) : '0];
    b_frag = hreg[(32'(b_idx) < NUM_H) ? HW'(b_idx) : '0];
    c_frag = freg[(32'(c_idx) < NUM_F) ? FX'(c_idx) : '0];
    d_frag = freg[(32'(d_idx) < NUM_F) ? FX'(d_idx) : '0];
  end

  // The two fp32 write ports are never used in the same cycle.
  assert property (@(posedge clk) !(f_we && s_we))
    else $error("matrix_regfile: element and segment fp32 writes in the same cycle");

endmodule
