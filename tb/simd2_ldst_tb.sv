// simd2_ldst_tb: load/store path against the behavioural shared memory.
// Loads an fp16 and an fp32 16x16 matrix with a leading dimension larger than 16 and an odd
// fp16 base, checking every register-file write; stores a fragment back and checks memory,
// including that bytes between rows are untouched. First without stalls, where a load must
// take 16*16 + 2 cycles from start to done, a store too, then with 30 % random stalls.
module simd2_ldst_tb;
  import simd2_pkg::*;

  localparam int F = 16;
  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  logic start = 0, is_store = 0, is_fp32 = 0;
  logic [2:0] idx = 0;
  logic [31:0] base = 0;
  logic [15:0] ld = 0;
  logic busy, done;
  smem_req_t mem_req;
  logic mem_gnt_0, mem_gnt_1, mem_rvalid_0, mem_rvalid_1, mem_gnt, mem_rvalid;
  logic [31:0] mem_rdata_0, mem_rdata_1, mem_rdata;
  logic h_we, f_we;
  logic [2:0] w_idx;
  logic [3:0] w_row, w_col;
  logic [15:0] h_wdata;
  logic [31:0] f_wdata;
  logic [31:0] st_frag [F][F];
  bit stall_mode = 0;

  logic [15:0] got_h [F][F];
  logic [31:0] got_f [F][F];

  smem_req_t req_0, req_1;
  assign req_0 = stall_mode ? '0 : mem_req;
  assign req_1 = stall_mode ? mem_req : '0;
  smem_model #(.SIZE(16384), .STALL_PCT(0))  u_m0 (.clk, .req(req_0), .gnt(mem_gnt_0), .rvalid(mem_rvalid_0), .rdata(mem_rdata_0));
  smem_model #(.SIZE(16384), .STALL_PCT(30)) u_m1 (.clk, .req(req_1), .gnt(mem_gnt_1), .rvalid(mem_rvalid_1), .rdata(mem_rdata_1));
  assign mem_gnt    = stall_mode ? mem_gnt_1 : mem_gnt_0;
  assign mem_rvalid = stall_mode ? mem_rvalid_1 : mem_rvalid_0;
  assign mem_rdata  = stall_mode ? mem_rdata_1 : mem_rdata_0;

  simd2_ldst #(.FRAG(F)) dut (.*);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (h_we) got_h[w_row][w_col] <= h_wdata;
    if (f_we) got_f[w_row][w_col] <= f_wdata;
  end

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic op(input bit st, input bit f32, input int unsigned b, input int unsigned l,
                    output int cycles);
    int t0;
    @(negedge clk);
    start = 1; is_store = st; is_fp32 = f32; idx = 3'd2; base = b; ld = 16'(l);
    t0 = $time / 10;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    cycles = $time / 10 - t0;
    checks++;
    if (w_idx !== 3'd2 && !st) begin failures++; $display("FAIL index"); end
  endtask

  task automatic pass(input bit stalls);
    int cyc;
    int unsigned hb, fb, sb, l;
    logic [15:0] eh;
    logic [31:0] ef;
    stall_mode = stalls;
    hb = 32'h0102; fb = 32'h0800; sb = 32'h2000; l = 21;
    for (int i = 0; i < F; i++)
      for (int j = 0; j < F; j++) begin
        u_m0.put16(hb + 2 * (i * l + j), 16'(i * 256 + j + 16'h5000 * stalls));
        u_m1.put16(hb + 2 * (i * l + j), 16'(i * 256 + j + 16'h5000 * stalls));
        u_m0.put32(fb + 4 * (i * l + j), 32'(i * 65536 + j * 3 + 7 + stalls));
        u_m1.put32(fb + 4 * (i * l + j), 32'(i * 65536 + j * 3 + 7 + stalls));
        st_frag[i][j] = 32'hC000_0000 + 32'(i * 100 + j) + stalls;
      end
    // guard words between stored rows
    for (int a = sb; a < sb + 4 * l * F; a += 4) begin u_m0.put32(a, 32'h5a5a_5a5a); u_m1.put32(a, 32'h5a5a_5a5a); end
    op(0, 0, hb, l, cyc);
    checks++;
    if (!stalls && cyc != F * F + 2) begin failures++; $display("FAIL fp16 load took %0d", cyc); end
    op(0, 1, fb, l, cyc);
    checks++;
    if (!stalls && cyc != F * F + 2) begin failures++; $display("FAIL fp32 load took %0d", cyc); end
    op(1, 1, sb, l, cyc);
    checks++;
    if (!stalls && cyc != F * F + 2) begin failures++; $display("FAIL store took %0d", cyc); end
    @(negedge clk);
    for (int i = 0; i < F; i++)
      for (int j = 0; j < F; j++) begin
        eh = 16'(i * 256 + j + 16'h5000 * stalls);
        ef = 32'(i * 65536 + j * 3 + 7 + stalls);
        checks += 2;
        if (got_h[i][j] !== eh) begin failures++; if (failures < 10) $display("FAIL h[%0d][%0d]=%h", i, j, got_h[i][j]); end
        if (got_f[i][j] !== ef) begin failures++; if (failures < 10) $display("FAIL f[%0d][%0d]=%h", i, j, got_f[i][j]); end
      end
    for (int i = 0; i < F; i++)
      for (int j = 0; j < int'(l); j++) begin
        ef = (j < F) ? 32'hC000_0000 + 32'(i * 100 + j) + stalls : 32'h5a5a_5a5a;
        checks++;
        if ((stalls ? u_m1.get32(sb + 4 * (i * l + j)) : u_m0.get32(sb + 4 * (i * l + j))) !== ef) begin
          failures++; if (failures < 10) $display("FAIL mem row %0d col %0d", i, j);
        end
      end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    pass(0);
    pass(1);
    checks++;
    if (u_m1.stalls == 0) begin failures++; $display("FAIL no stall happened"); end
    $display("stalls seen: %0d", u_m1.stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
