// simd2_mmo_seq: runs one 16x16x16 SIMD^2 arithmetic instruction on the N x N SIMD^2 unit.
//
// The instruction set works on FRAG x FRAG fragments (16x16) while the unit computes one
// N-wide output row of an N x N x N tile per cycle (4x4). The paper gives both sizes but not
// how an instruction is split; this sequencer (this design's choice) walks the tiles as
//   for ti, tj (output tile) / for tk (reduction tile) / for i (row inside the tile):
//     unit input  a_row = A[ti*N+i][tk*N +: N], b_tile = B[tk*N +: N][tj*N +: N],
//                 c_row = C[ti*N+i][tj*N +: N] when tk == 0, else the partial result
//                 already written to the destination D[ti*N+i][tj*N +: N].
// Each D element is therefore C (+) (A[i][0] (x) B[0][j]) (+) ... (+) (A[i][15] (x) B[15][j]),
// folded strictly in k order. The partial result of a row is written one cycle after it enters
// the unit and is read again N cycles later, so N >= 2 is required.
//
// Interface: start (one cycle, with the decoded ALU opcodes) while idle; busy while running;
// done pulses in the cycle the last row is written. The fragments are read combinationally
// from the register file and must stay unchanged while busy. Results leave through the row
// segment write port (wr_*). Timing: (FRAG/N)^3 * N issue cycles + 1, i.e. 257 cycles from
// start to done for 16/4, identical for every opcode.
module simd2_mmo_seq
  import simd2_pkg::*;
#(
  parameter int unsigned FRAG = 16,
  parameter int unsigned N    = 4
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  oplus_op_e               oplus_op,
  input  otimes_op_e              otimes_op,
  input  logic [15:0]             a_frag [FRAG][FRAG],
  input  logic [15:0]             b_frag [FRAG][FRAG],
  input  logic [31:0]             c_frag [FRAG][FRAG],
  input  logic [31:0]             p_frag [FRAG][FRAG],   // current contents of destination D
  output logic                    wr_en,
  output logic [$clog2(FRAG)-1:0] wr_row,
  output logic [$clog2(FRAG)-1:0] wr_col,
  output logic [31:0]             wr_data [N],
  output logic                    busy,
  output logic                    done
);

  localparam int unsigned T  = FRAG / N;               // tiles per dimension
  localparam int unsigned TW = (T > 1) ? $clog2(T) : 1;
  localparam int unsigned NW = $clog2(N);
  localparam int unsigned FW = $clog2(FRAG);

  initial begin
    assert (N >= 2 && FRAG % N == 0) else $fatal(1, "simd2_mmo_seq: need N >= 2 and N | FRAG");
  end

  logic          run;
  logic [TW-1:0] ti, tj, tk;
  logic [NW-1:0] ri;
  logic          last;
  oplus_op_e     op_r;
  otimes_op_e    ot_r;

  // unit inputs
  logic [15:0] a_row  [N];
  logic [15:0] b_tile [N][N];
  logic [31:0] c_row  [N];
  logic        u_valid;
  logic [31:0] u_d    [N];
  logic [FW-1:0] row_q, col_q;   // where the row in the unit goes
  logic          last_q;

  logic [FW-1:0] cur_row, cur_col;
  assign cur_row = FW'(32'(ti) * N + 32'(ri));
  assign cur_col = FW'(32'(tj) * N);

  always_comb begin
    for (int k = 0; k < N; k++) begin
      a_row[k] = a_frag[cur_row][32'(tk) * N + k];
      for (int j = 0; j < N; j++)
        b_tile[k][j] = b_frag[32'(tk) * N + k][32'(cur_col) + j];
    end
    for (int j = 0; j < N; j++)
      c_row[j] = (tk == '0) ? c_frag[cur_row][32'(cur_col) + j] : p_frag[cur_row][32'(cur_col) + j];
  end

  assign last = (32'(ti) == T-1) && (32'(tj) == T-1) && (32'(tk) == T-1) && (32'(ri) == N-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      ti   <= '0; tj <= '0; tk <= '0; ri <= '0;
      op_r <= OP_ADD;
      ot_r <= OT_MUL;
      row_q <= '0; col_q <= '0; last_q <= 1'b0;
    end else begin
      row_q  <= cur_row;
      col_q  <= cur_col;
      last_q <= run && last;
      if (start && !run) begin
        run  <= 1'b1;
        op_r <= oplus_op;
        ot_r <= otimes_op;
        ti <= '0; tj <= '0; tk <= '0; ri <= '0;
      end else if (run) begin
        if (last) run <= 1'b0;
        if (32'(ri) == N-1) begin
          ri <= '0;
          if (32'(tk) == T-1) begin
            tk <= '0;
            if (32'(tj) == T-1) begin
              tj <= '0;
              ti <= (32'(ti) == T-1) ? '0 : ti + 1'b1;
            end else tj <= tj + 1'b1;
          end else tk <= tk + 1'b1;
        end else ri <= ri + 1'b1;
      end
    end
  end

  simd2_unit #(.N(N)) u_unit (
    .clk, .rst_n,
    .in_valid (run),
    .oplus_op (op_r),
    .otimes_op(ot_r),
    .a_row, .b_tile, .c_row,
    .out_valid(u_valid),
    .d_row    (u_d)
  );

  assign wr_en   = u_valid;
  assign wr_row  = row_q;
  assign wr_col  = col_q;
  assign wr_data = u_d;
  assign busy    = run || u_valid;
  assign done    = last_q;

endmodule
