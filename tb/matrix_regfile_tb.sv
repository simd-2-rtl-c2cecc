// matrix_regfile_tb: fills every fp16 and fp32 fragment through the element write ports,
// overwrites random row segments through the segment port, and checks all four
// whole-fragment read ports against a testbench copy of the contents.
module matrix_regfile_tb;
  localparam int F = 16, NH = 4, NF = 4, S = 4;
  int checks = 0, failures = 0;

  logic clk = 0;
  logic h_we = 0, f_we = 0, s_we = 0;
  logic [2:0] h_idx, f_idx, s_idx, a_idx, b_idx, c_idx, d_idx;
  logic [3:0] h_row, h_col, f_row, f_col, s_row, s_col;
  logic [15:0] h_wdata;
  logic [31:0] f_wdata;
  logic [31:0] s_wdata [S];
  logic [15:0] a_frag [F][F];
  logic [15:0] b_frag [F][F];
  logic [31:0] c_frag [F][F];
  logic [31:0] d_frag [F][F];

  logic [15:0] mh [NH][F][F];
  logic [31:0] mf [NF][F][F];

  matrix_regfile #(.FRAG(F), .NUM_H(NH), .NUM_F(NF), .SEG(S)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    h_idx = 0; f_idx = 0; s_idx = 0; h_row = 0; h_col = 0; f_row = 0; f_col = 0;
    s_row = 0; s_col = 0; h_wdata = 0; f_wdata = 0;
    for (int j = 0; j < S; j++) s_wdata[j] = 0;
    a_idx = 0; b_idx = 1; c_idx = 0; d_idx = 1;
    // fill everything through the element ports (both ports in the same cycle)
    for (int r = 0; r < NH; r++)
      for (int i = 0; i < F; i++)
        for (int j = 0; j < F; j++) begin
          @(negedge clk);
          h_we = 1; h_idx = 3'(r); h_row = 4'(i); h_col = 4'(j); h_wdata = 16'($urandom);
          mh[r][i][j] = h_wdata;
          f_we = 1; f_idx = 3'(r); f_row = 4'(i); f_col = 4'(j); f_wdata = $urandom;
          mf[r][i][j] = f_wdata;
        end
    @(negedge clk);
    h_we = 0; f_we = 0;
    // segment writes
    for (int n = 0; n < 200; n++) begin
      @(negedge clk);
      s_we = 1; s_idx = 3'($urandom_range(NF - 1)); s_row = 4'($urandom);
      s_col = 4'($urandom_range(F / S - 1) * S);
      for (int j = 0; j < S; j++) begin
        s_wdata[j] = $urandom;
        mf[s_idx][s_row][32'(s_col) + j] = s_wdata[j];
      end
    end
    @(negedge clk);
    s_we = 0;
    for (int r = 0; r < NH; r++) begin
      a_idx = 3'(r); b_idx = 3'((r + 1) % NH); c_idx = 3'(r); d_idx = 3'((r + 3) % NF);
      #1;
      for (int i = 0; i < F; i++)
        for (int j = 0; j < F; j++) begin
          checks += 4;
          if (a_frag[i][j] !== mh[r][i][j]) failures++;
          if (b_frag[i][j] !== mh[(r + 1) % NH][i][j]) failures++;
          if (c_frag[i][j] !== mf[r][i][j]) failures++;
          if (d_frag[i][j] !== mf[(r + 3) % NF][i][j]) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
