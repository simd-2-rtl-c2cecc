// simd2_core: the SIMD^2 part of one GPU subcore (paper Fig. 3(b)), top of this design.
//
// The subcore front end (warp scheduler / math dispatch, not part of this design) issues
// SIMD^2 instructions through a valid/ready port. The core runs one instruction at a time:
//   * I_LOAD_H / I_LOAD_F: the load/store path reads a 16x16 fp16 or fp32 matrix from shared
//     memory (base address instr.addr, leading dimension instr.ld) into fragment instr.rd;
//   * I_STORE: writes fp32 fragment instr.rd back to shared memory;
//   * the nine arithmetic opcodes: the decoder selects the (+) and (x) operations and the
//     sequencer computes D[rd] = C[rc] (+) (A[ra] (x) B[rb]) on the 4x4 SIMD^2 unit.
// The register file is modelled here as a fragment store (the paper shares the GPU register
// file with the CUDA cores; that sharing is outside this design). The shared memory / MIO is
// reached through the smem_* port (protocol in simd2_ldst). Fragments are 16x16 and the unit
// 4x4, both from the paper; the one-instruction-at-a-time control, register counts and
// encodings are this design's choices.
//
// Timing: instr_ready is high only while idle; an accepted instruction completes with a
// one-cycle instr_done pulse. Arithmetic instructions take 259 cycles from acceptance to
// instr_done for every opcode (FRAG=16, N=4); loads and stores take 260 cycles plus one per
// stalled (gnt low) cycle. A non-arithmetic, non-memory opcode completes in 2 cycles and has
// no effect.
module simd2_core
  import simd2_pkg::*;
#(
  parameter int unsigned FRAG  = 16,  // fragment dimension (paper: 16x16)
  parameter int unsigned N     = 4,   // SIMD^2 unit array dimension (paper: 4x4)
  parameter int unsigned NUM_H = 4,   // fp16 fragment registers (assumed)
  parameter int unsigned NUM_F = 4    // fp32 fragment registers (assumed)
) (
  input  logic         clk,
  input  logic         rst_n,
  // instruction issue from the subcore front end
  input  logic         instr_valid,
  output logic         instr_ready,
  input  simd2_instr_t instr,
  output logic         instr_done,
  // shared memory (MIO)
  output smem_req_t    smem_req,
  input  logic         smem_gnt,
  input  logic         smem_rvalid,
  input  logic [31:0]  smem_rdata
);

  localparam int unsigned FW = $clog2(FRAG);

  typedef enum logic [1:0] {S_IDLE, S_START, S_BUSY} state_e;
  state_e       state;
  simd2_instr_t ir;

  logic       is_arith;
  oplus_op_e  oplus_op;
  otimes_op_e otimes_op;
  logic       is_mem, unit_done, mem_done;

  simd2_decoder u_dec (.opcode(ir.opcode), .is_arith, .oplus_op, .otimes_op);
  assign is_mem = (ir.opcode == I_LOAD_H) || (ir.opcode == I_LOAD_F) || (ir.opcode == I_STORE);

  // register file
  logic [15:0] a_frag [FRAG][FRAG];
  logic [15:0] b_frag [FRAG][FRAG];
  logic [31:0] c_frag [FRAG][FRAG];
  logic [31:0] d_frag [FRAG][FRAG];
  logic          h_we, f_we, s_we;
  logic [2:0]    w_idx;
  logic [FW-1:0] w_row, w_col, s_row, s_col;
  logic [15:0]   h_wdata;
  logic [31:0]   f_wdata;
  logic [31:0]   s_wdata [N];

  matrix_regfile #(.FRAG(FRAG), .NUM_H(NUM_H), .NUM_F(NUM_F), .SEG(N)) u_rf (
    .clk,
    .h_we, .h_idx(w_idx), .h_row(w_row), .h_col(w_col), .h_wdata,
    .f_we, .f_idx(w_idx), .f_row(w_row), .f_col(w_col), .f_wdata,
    .s_we, .s_idx(ir.rd), .s_row, .s_col, .s_wdata,
    .a_idx(ir.ra), .b_idx(ir.rb), .c_idx(ir.rc), .d_idx(ir.rd),
    .a_frag, .b_frag, .c_frag, .d_frag
  );

  // arithmetic: sequencer + SIMD^2 unit
  logic unit_busy;
  simd2_mmo_seq #(.FRAG(FRAG), .N(N)) u_seq (
    .clk, .rst_n,
    .start    (state == S_START && is_arith),
    .oplus_op, .otimes_op,
    .a_frag, .b_frag, .c_frag,
    .p_frag   (d_frag),
    .wr_en    (s_we),
    .wr_row   (s_row),
    .wr_col   (s_col),
    .wr_data  (s_wdata),
    .busy     (unit_busy),
    .done     (unit_done)
  );

  // load / store
  logic mem_busy;
  simd2_ldst #(.FRAG(FRAG)) u_ldst (
    .clk, .rst_n,
    .start     (state == S_START && is_mem),
    .is_store  (ir.opcode == I_STORE),
    .is_fp32   (ir.opcode != I_LOAD_H),
    .idx       (ir.rd),
    .base      (ir.addr),
    .ld        (ir.ld),
    .busy      (mem_busy),
    .done      (mem_done),
    .mem_req   (smem_req),
    .mem_gnt   (smem_gnt),
    .mem_rvalid(smem_rvalid),
    .mem_rdata (smem_rdata),
    .h_we, .f_we, .w_idx, .w_row, .w_col, .h_wdata, .f_wdata,
    .st_frag   (d_frag)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ir         <= '0;
      instr_done <= 1'b0;
    end else begin
      instr_done <= 1'b0;
      unique case (state)
        S_IDLE:  if (instr_valid) begin
                   ir    <= instr;
                   state <= S_START;
                 end
        S_START: if (is_arith || is_mem) state <= S_BUSY;
                 else begin
                   state      <= S_IDLE;      // unknown opcode: no operation
                   instr_done <= 1'b1;
                 end
        S_BUSY:  if (unit_done || mem_done) begin
                   state      <= S_IDLE;
                   instr_done <= 1'b1;
                 end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign instr_ready = (state == S_IDLE);

  // The instruction register must not change while an instruction is in flight.
  assert property (@(posedge clk) disable iff (!rst_n) (state != S_IDLE) |=> $stable(ir) || (state == S_IDLE))
    else $error("simd2_core: instruction register changed while busy");
  assert property (@(posedge clk) disable iff (!rst_n) !(unit_busy && mem_busy))
    else $error("simd2_core: arithmetic and load/store active together");

endmodule
