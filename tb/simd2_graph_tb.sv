// simd2_graph_tb: graph workloads of the SIMD^2 instruction set run on the core.
//
// A 32-vertex random directed graph is solved with the all-pairs Bellman-Ford scheme of the
// paper's programming model: repeat D = C (+) (Adj (x) Dist) until nothing changes, with the
// 32x32 matrices split into 16x16 fragments and the reduction dimension walked tile by tile
// (load C tile, then for each k tile load A and B and issue the instruction with D = C).
// Between iterations the testbench plays the CUDA cores: it converts the fp32 result to the
// fp16 B operand and checks convergence. Three problems are solved:
//   minplus  all-pairs shortest paths   (no edge = +inf, Adj[i][i] = 0)
//   maxmin   maximum-capacity paths     (no edge = 0,    Adj[i][i] = +inf)
//   orand    transitive closure         (no edge = 0,    Adj[i][i] = 1)
//   maxplus  critical (longest) paths   (acyclic graph, no edge = -inf, Adj[i][i] = 0)
//   maxmul   maximum-reliability paths  (no edge = 0, Adj[i][i] = 1, weights 1/2, 1/4, 1/8)
//   minmul   minimum-reliability paths  (layered acyclic graph, no edge = +inf, Adj[i][i] = 1)
//   minmax   minimax paths (the bottleneck values behind a minimum spanning tree;
//            symmetric graph, no edge = +inf, Adj[i][i] = 0)
// and each result is compared with a Floyd-Warshall solution computed in the testbench.
// Weights are small integers or powers of two, so every intermediate value is exact in fp16
// and fp32.
module simd2_graph_tb;
  import simd2_pkg::*;
  import simd2_ref_pkg::*;

  localparam int V = 32, F = 16, T = V / F;
  localparam int unsigned A_BASE = 32'h0000, B_BASE = 32'h1000, C_BASE = 32'h2000, D_BASE = 32'h4000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic instr_valid = 0, instr_ready, instr_done;
  simd2_instr_t instr;
  smem_req_t smem_req;
  logic smem_gnt, smem_rvalid;
  logic [31:0] smem_rdata;

  simd2_core dut (.*);
  smem_model #(.SIZE(32768), .STALL_PCT(10)) u_mem (.clk, .req(smem_req), .gnt(smem_gnt),
                                                   .rvalid(smem_rvalid), .rdata(smem_rdata));
  always #5 clk = ~clk;

  real adj [V][V];     // edge weights, problem encoding applied
  real gold [V][V];
  int  n_instr = 0;

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic exec(input simd2_opcode_e opc, input int rd, input int ra, input int rb,
                      input int rc, input int unsigned addr);
    @(negedge clk);
    instr_valid = 1;
    instr = '{opcode: opc, rd: 3'(rd), ra: 3'(ra), rb: 3'(rb), rc: 3'(rc), addr: addr, ld: 16'(V)};
    @(posedge clk);
    while (!instr_ready) @(posedge clk);
    #1 instr_valid = 0;
    @(posedge clk);
    while (!instr_done) @(posedge clk);
    n_instr++;
  endtask

  function automatic real comb(input simd2_opcode_e opc, input real x, input real y);
    case (opc)
      I_MINPLUS, I_MAXPLUS: return x + y;
      I_MAXMUL, I_MINMUL:   return x * y;
      I_MAXMIN:             return (x < y) ? x : y;
      I_MINMAX:             return (x > y) ? x : y;
      default:              return (x != 0.0 && y != 0.0) ? 1.0 : 0.0;
    endcase
  endfunction
  function automatic real red(input simd2_opcode_e opc, input real x, input real y);
    case (opc)
      I_MINPLUS, I_MINMUL, I_MINMAX: return (x < y) ? x : y;
      I_MAXMIN, I_MAXPLUS, I_MAXMUL: return (x > y) ? x : y;
      default:                       return (x != 0.0 || y != 0.0) ? 1.0 : 0.0;
    endcase
  endfunction

  // value meaning "no edge", the diagonal, and a random edge weight for each problem
  function automatic real no_edge(input simd2_opcode_e opc);
    real inf;
    inf = 1.0e300 * 1.0e300;
    case (opc)
      I_MINPLUS, I_MINMUL, I_MINMAX: return inf;
      I_MAXPLUS:                     return -inf;
      default:                       return 0.0;
    endcase
  endfunction
  function automatic real diag(input simd2_opcode_e opc);
    case (opc)
      I_MINPLUS, I_MAXPLUS, I_MINMAX: return 0.0;
      I_MAXMIN:                       return 1.0e300 * 1.0e300;
      default:                        return 1.0;
    endcase
  endfunction
  function automatic real weight(input simd2_opcode_e opc);
    int sh;
    sh = int'($urandom_range(3, 1));
    case (opc)
      I_ORAND:           return 1.0;
      I_MAXMUL, I_MINMUL: return 1.0 / real'(1 << sh);
      default:           return real'($urandom_range(20, 1));
    endcase
  endfunction

  task automatic run_problem(input simd2_opcode_e opc);
    int iters;
    bit changed;
    bit dag, sym;
    dag = (opc == I_MAXPLUS) || (opc == I_MINMUL);
    sym = (opc == I_MINMAX);
    // build the graph
    for (int i = 0; i < V; i++)
      for (int j = 0; j < V; j++) begin
        bit edge_ij;
        edge_ij = ($urandom_range(9) < 2) && !(dag && j < i);
        // minmul: layered graph (4 layers of 8, edges to the next layer only) so that path
        // products stay within the fp16 range of the B operand
        if (opc == I_MINMUL) edge_ij = ($urandom_range(9) < 4) && (j / 8 == i / 8 + 1);
        if (i == j) adj[i][j] = diag(opc);
        else if (sym && j < i) adj[i][j] = adj[j][i];
        else if (!edge_ij) adj[i][j] = no_edge(opc);
        else adj[i][j] = weight(opc);
      end
    // Floyd-Warshall reference
    gold = adj;
    for (int k = 0; k < V; k++)
      for (int i = 0; i < V; i++)
        for (int j = 0; j < V; j++)
          gold[i][j] = red(opc, gold[i][j], comb(opc, gold[i][k], gold[k][j]));
    // memory: A = adjacency (fp16), C = distance (fp32, starts as the adjacency)
    for (int i = 0; i < V; i++)
      for (int j = 0; j < V; j++) begin
        u_mem.put16(A_BASE + 2 * (i * V + j), f32_to_h(r2f(adj[i][j])));
        u_mem.put32(C_BASE + 4 * (i * V + j), r2f(adj[i][j]));
      end
    iters = 0;
    do begin
      // host step: B = fp16 copy of the current distance matrix C
      for (int i = 0; i < V; i++)
        for (int j = 0; j < V; j++)
          u_mem.put16(B_BASE + 2 * (i * V + j), f32_to_h(u_mem.get32(C_BASE + 4 * (i * V + j))));
      // D = C (+) (A (x) B), tiled into 16x16x16 instructions
      for (int ti = 0; ti < T; ti++)
        for (int tj = 0; tj < T; tj++) begin
          exec(I_LOAD_F, 0, 0, 0, 0, C_BASE + 4 * (ti * F * V + tj * F));
          for (int tk = 0; tk < T; tk++) begin
            exec(I_LOAD_H, 0, 0, 0, 0, A_BASE + 2 * (ti * F * V + tk * F));
            exec(I_LOAD_H, 1, 0, 0, 0, B_BASE + 2 * (tk * F * V + tj * F));
            exec(opc, 0, 0, 1, 0, 0);
          end
          exec(I_STORE, 0, 0, 0, 0, D_BASE + 4 * (ti * F * V + tj * F));
        end
      // host step: convergence check, C = D
      changed = 0;
      for (int i = 0; i < V; i++)
        for (int j = 0; j < V; j++) begin
          logic [31:0] d;
          d = u_mem.get32(D_BASE + 4 * (i * V + j));
          if (d != u_mem.get32(C_BASE + 4 * (i * V + j))) changed = 1;
          u_mem.put32(C_BASE + 4 * (i * V + j), d);
        end
      iters++;
    end while (changed && iters < V + 1);
    checks++;
    if (changed) begin failures++; $display("FAIL %s did not converge", opc.name()); end
    for (int i = 0; i < V; i++)
      for (int j = 0; j < V; j++) begin
        checks++;
        if (u_mem.get32(C_BASE + 4 * (i * V + j)) !== r2f(gold[i][j])) begin
          failures++;
          if (failures < 10) $display("FAIL %s [%0d][%0d] = %h exp %h", opc.name(), i, j,
                                      u_mem.get32(C_BASE + 4 * (i * V + j)), r2f(gold[i][j]));
        end
      end
    $display("%s: converged after %0d iterations", opc.name(), iters);
  endtask

  // fp32 -> fp16 for the exact small integers, 0, 1 and +inf used here
  function automatic logic [15:0] f32_to_h(input logic [31:0] f);
    if (f[30:23] == 8'hff) return {f[31], 15'h7c00};
    if (f[30:23] == 8'h00) return {f[31], 15'd0};
    return {f[31], 5'(32'(f[30:23]) - 127 + 15), f[22:13]};
  endfunction

  initial begin
    instr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_problem(I_MINPLUS);
    run_problem(I_MAXMIN);
    run_problem(I_ORAND);
    run_problem(I_MAXPLUS);
    run_problem(I_MAXMUL);
    run_problem(I_MINMUL);
    run_problem(I_MINMAX);
    $display("instructions executed: %0d", n_instr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
