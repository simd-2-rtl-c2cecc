// simd2_core_tb: end-to-end test of the SIMD^2 core at its default parameters (16x16
// fragments, 4x4 unit), with the shared memory behavioural model stalling 20 % of requests.
// For each of the nine arithmetic instructions it loads A and B (fp16) and C (fp32) from
// shared memory with a leading dimension of 24, runs D = C (+) (A (x) B), stores D and compares
// every element with reference arithmetic. Instructions are issued back to back, so the
// front end sees instr_ready low while the core is busy. One extra run aliases D onto C and
// one issues an undefined opcode. It checks the fixed latency of arithmetic instructions
// (259 cycles from acceptance to instr_done, equal for all opcodes) and counts every
// mechanism: each opcode, fp16 load, fp32 load, store, memory stall, issue back-pressure,
// D/C aliasing and the no-op; one that never happened counts as a failure.
module simd2_core_tb;
  import simd2_pkg::*;
  import simd2_ref_pkg::*;

  localparam int F = 16;
  localparam int LD = 24;
  localparam int unsigned A_BASE = 32'h0000, B_BASE = 32'h1000, C_BASE = 32'h2000, D_BASE = 32'h4000;
  localparam int ARITH_LAT = 259;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, instr_done;
  simd2_instr_t instr;
  smem_req_t smem_req;
  logic smem_gnt, smem_rvalid;
  logic [31:0] smem_rdata;

  simd2_core dut (.*);
  smem_model #(.SIZE(32768), .STALL_PCT(20)) u_mem (.clk, .req(smem_req), .gnt(smem_gnt),
                                                   .rvalid(smem_rvalid), .rdata(smem_rdata));

  always #5 clk = ~clk;

  // mechanism counters
  int n_op [NUM_ARITH];
  int n_load_h = 0, n_load_f = 0, n_store = 0, n_backpressure = 0, n_alias = 0, n_nop = 0;
  int n_done = 0;
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (instr_done) n_done++;
    if (instr_valid && !instr_ready) n_backpressure++;
  end

  logic [15:0] ma [F][F];
  logic [15:0] mb [F][F];
  logic [31:0] mc [F][F];

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Issue one instruction; returns the cycle in which it was accepted.
  task automatic issue(input simd2_opcode_e opc, input int rd, input int ra, input int rb,
                       input int rc, input int unsigned addr, output int acc_cyc);
    @(negedge clk);
    instr_valid = 1;
    instr = '{opcode: opc, rd: 3'(rd), ra: 3'(ra), rb: 3'(rb), rc: 3'(rc), addr: addr, ld: 16'(LD)};
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    acc_cyc = cyc;
    #1 instr_valid = 0;
    if (opc < I_LOAD_H) n_op[opc]++;
    else if (opc == I_LOAD_H) n_load_h++;
    else if (opc == I_LOAD_F) n_load_f++;
    else if (opc == I_STORE) n_store++;
    else n_nop++;
  endtask

  task automatic wait_done(output int done_cyc);
    @(posedge clk);
    while (!instr_done) @(posedge clk);
    done_cyc = cyc;
  endtask

  task automatic run(input simd2_opcode_e opc, input bit alias_dc);
    int t, ta, td, rd;
    logic [31:0] e, got;
    for (int i = 0; i < F; i++)
      for (int j = 0; j < F; j++) begin
        ma[i][j] = (opc == I_ORAND) ? 16'($urandom_range(1)) * 16'h3c00 : rand_h_pinf();
        mb[i][j] = (opc == I_ORAND) ? 16'($urandom_range(4) == 0) * 16'h3c00 : rand_h_pinf();
        mc[i][j] = (opc == I_ORAND) ? 32'd0 : h2f(rand_h_mod());
        u_mem.put16(A_BASE + 2 * (i * LD + j), ma[i][j]);
        u_mem.put16(B_BASE + 2 * (i * LD + j), mb[i][j]);
        u_mem.put32(C_BASE + 4 * (i * LD + j), mc[i][j]);
      end
    rd = alias_dc ? 1 : 3;
    if (alias_dc) n_alias++;
    issue(I_LOAD_H, 0, 0, 0, 0, A_BASE, t);
    issue(I_LOAD_H, 1, 0, 0, 0, B_BASE, t);
    issue(I_LOAD_F, 1, 0, 0, 0, C_BASE, t);
    issue(opc, rd, 0, 1, 1, 0, ta);
    wait_done(td);
    checks++;
    if (td - ta != ARITH_LAT) begin
      failures++; $display("FAIL %s latency %0d", opc.name(), td - ta);
    end
    issue(I_STORE, rd, 0, 0, 0, D_BASE, t);
    wait_done(t);
    for (int i = 0; i < F; i++)
      for (int j = 0; j < F; j++) begin
        e = mc[i][j];
        for (int k = 0; k < F; k++)
          e = ref_oplus(ref_oplus_of(opc), e, ref_otimes(ref_otimes_of(opc), ma[i][k], mb[k][j]));
        got = u_mem.get32(D_BASE + 4 * (i * LD + j));
        checks++;
        if (got !== e) begin
          failures++;
          if (failures < 10) $display("FAIL %s D[%0d][%0d]=%h exp %h", opc.name(), i, j, got, e);
        end
      end
  endtask

  initial begin
    int t;
    for (int o = 0; o < NUM_ARITH; o++) n_op[o] = 0;
    instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int o = 0; o < NUM_ARITH; o++) run(simd2_opcode_e'(o), 1'b0);
    run(I_MINPLUS, 1'b1);
    // undefined opcode: completes without effect
    issue(simd2_opcode_e'(4'd15), 0, 0, 0, 0, 0, t);
    wait_done(t);
    repeat (2) @(posedge clk);
    checks++;
    if (n_done != 10 * 5 + 1) begin failures++; $display("FAIL %0d completions", n_done); end
    // every mechanism must have happened
    for (int o = 0; o < NUM_ARITH; o++) begin
      checks++;
      if (n_op[o] == 0) begin failures++; $display("FAIL opcode %0d never ran", o); end
    end
    checks += 7;
    if (n_load_h == 0)       begin failures++; $display("FAIL no fp16 load"); end
    if (n_load_f == 0)       begin failures++; $display("FAIL no fp32 load"); end
    if (n_store == 0)        begin failures++; $display("FAIL no store"); end
    if (u_mem.stalls == 0)   begin failures++; $display("FAIL no memory stall"); end
    if (n_backpressure == 0) begin failures++; $display("FAIL no issue back-pressure"); end
    if (n_alias == 0)        begin failures++; $display("FAIL no D/C aliasing"); end
    if (n_nop == 0)          begin failures++; $display("FAIL no undefined opcode"); end
    $display("mechanisms: loads fp16=%0d fp32=%0d stores=%0d stalls=%0d backpressure=%0d alias=%0d nop=%0d",
             n_load_h, n_load_f, n_store, u_mem.stalls, n_backpressure, n_alias, n_nop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
