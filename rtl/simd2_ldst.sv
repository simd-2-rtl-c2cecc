// simd2_ldst: matrix load/store path between shared memory and the fragment register file.
//
// Implements the load and store instructions of the instruction set: a load moves a
// FRAG x FRAG matrix out of the one-dimensional shared-memory address space into a fragment,
// a store moves an fp32 fragment back. As in the programming interface, element (r, c) lives
// at base + (r * ld + c) * size, with ld the leading dimension in elements and size 2 bytes
// (fp16 load) or 4 bytes (fp32 load or store). The paper gives this function; the memory
// protocol and the one-element-per-request traffic are this design's choices.
//
// Shared-memory port: a request (req, we, addr, wdata, be) is accepted in a cycle where
// req && gnt; gnt low is a stall and the request is held unchanged. Read data returns with
// rvalid exactly one cycle after acceptance, in order. A 32-bit word is returned; for fp16
// the half selected by addr[1] is used. Requests are issued back to back, one per cycle while
// granted. Unstalled, done follows start by FRAG*FRAG + 2 cycles (258 for 16x16): one cycle to
// start, one request per cycle, and one for the last read reply or the final acceptance.
//
// Interface: start (one cycle, while idle) with is_store, is_fp32, idx, base, ld; busy while
// running; done pulses once when the last element has been written (load) or accepted (store).
module simd2_ldst
  import simd2_pkg::*;
#(
  parameter int unsigned FRAG = 16
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // command
  input  logic                    start,
  input  logic                    is_store,
  input  logic                    is_fp32,
  input  logic [2:0]              idx,
  input  logic [SMEM_AW-1:0]      base,
  input  logic [15:0]             ld,
  output logic                    busy,
  output logic                    done,
  // shared memory
  output smem_req_t               mem_req,
  input  logic                    mem_gnt,
  input  logic                    mem_rvalid,
  input  logic [31:0]             mem_rdata,
  // register file: element writes (loads) and the fragment being stored
  output logic                    h_we,
  output logic                    f_we,
  output logic [2:0]              w_idx,
  output logic [$clog2(FRAG)-1:0] w_row,
  output logic [$clog2(FRAG)-1:0] w_col,
  output logic [15:0]             h_wdata,
  output logic [31:0]             f_wdata,
  input  logic [31:0]             st_frag [FRAG][FRAG]
);

  localparam int unsigned FW  = $clog2(FRAG);
  localparam int unsigned CNT = FRAG * FRAG;
  localparam int unsigned CW  = $clog2(CNT + 1);

  logic          run, st_r, f32_r;
  logic [2:0]    idx_r;
  logic [SMEM_AW-1:0] base_r;
  logic [15:0]   ld_r;
  logic [CW-1:0] issued;           // requests accepted so far
  logic [CW-1:0] answered;         // read replies received so far
  logic          pend;             // a read was accepted last cycle
  logic          pend_hi;          // its halfword select
  logic [FW-1:0] pend_row, pend_col;

  logic [FW-1:0] q_row, q_col;
  logic [SMEM_AW-1:0] q_addr;
  logic          issuing, finish;

  assign q_row   = issued[2*FW-1:FW];
  assign q_col   = issued[FW-1:0];
  assign q_addr  = base_r + ((SMEM_AW'(q_row) * SMEM_AW'(ld_r) + SMEM_AW'(q_col)) << (f32_r ? 2 : 1));
  assign issuing = run && (32'(issued) < CNT);

  always_comb begin
    mem_req       = '0;
    mem_req.req   = issuing;
    mem_req.we    = st_r;
    mem_req.addr  = q_addr;
    mem_req.wdata = st_frag[q_row][q_col];
    mem_req.be    = f32_r ? 4'b1111 : (q_addr[1] ? 4'b1100 : 4'b0011);
  end

  // register-file writes of returning read data
  assign h_we    = mem_rvalid && pend && !f32_r;
  assign f_we    = mem_rvalid && pend &&  f32_r;
  assign w_idx   = idx_r;
  assign w_row   = pend_row;
  assign w_col   = pend_col;
  assign h_wdata = pend_hi ? mem_rdata[31:16] : mem_rdata[15:0];
  assign f_wdata = mem_rdata;

  assign finish = run && (st_r ? (32'(issued) == CNT)
                               : (32'(answered) == CNT - 1) && mem_rvalid && pend);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; st_r <= 1'b0; f32_r <= 1'b0; idx_r <= '0; base_r <= '0; ld_r <= '0;
      issued <= '0; answered <= '0; pend <= 1'b0; pend_hi <= 1'b0;
      pend_row <= '0; pend_col <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      pend <= issuing && mem_gnt && !st_r;
      if (issuing && mem_gnt) begin
        issued   <= issued + 1'b1;
        pend_hi  <= q_addr[1];
        pend_row <= q_row;
        pend_col <= q_col;
      end
      if (mem_rvalid && pend) answered <= answered + 1'b1;
      if (start && !run) begin
        run <= 1'b1; st_r <= is_store; f32_r <= is_fp32 | is_store; idx_r <= idx;
        base_r <= base; ld_r <= ld; issued <= '0; answered <= '0;
      end else if (finish) begin
        run  <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign busy = run;

  // Protocol rules of the shared-memory port.
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req.req && !mem_gnt |=> mem_req.req && $stable(mem_req.addr))
    else $error("simd2_ldst: request dropped or changed while stalled");
  assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> pend)
    else $error("simd2_ldst: read reply without an accepted read");

endmodule
