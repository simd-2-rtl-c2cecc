// fp32_mul: combinational IEEE-754 single-precision multiplier, y = a * b.
//
// Round to nearest even, subnormals flushed to zero, canonical quiet NaN, as fp32_add
// (this design's own conventions). The 24x24-bit significand product is normalised by at
// most one position and rounded with guard and sticky bits. Purely combinational.
module fp32_mul
  import simd2_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  always_comb begin
    logic        s;
    logic [7:0]  ea, eb;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [47:0] p;
    logic [23:0] m;
    logic        g, st, rup;
    logic [24:0] rnd;
    int          e;

    s  = a[31] ^ b[31];
    ea = a[30:23]; eb = b[30:23];
    a_nan  = (ea == 8'hff) && (a[22:0] != 0);
    b_nan  = (eb == 8'hff) && (b[22:0] != 0);
    a_inf  = (ea == 8'hff) && (a[22:0] == 0);
    b_inf  = (eb == 8'hff) && (b[22:0] == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    p = {24'd0, 1'b1, a[22:0]} * {24'd0, 1'b1, b[22:0]};
    e = int'(ea) + int'(eb) - 127;
    m = '0; g = 1'b0; st = 1'b0; rup = 1'b0; rnd = '0;
    y = 32'd0;

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = FP32_QNAN;
    end else if (a_inf || b_inf) begin
      y = {s, 8'hff, 23'd0};
    end else if (a_zero || b_zero) begin
      y = {s, 31'd0};
    end else begin
      if (p[47]) begin
        m  = p[47:24];
        g  = p[23];
        st = p[22:0] != 0;
        e  = e + 1;
      end else begin
        m  = p[46:23];
        g  = p[22];
        st = p[21:0] != 0;
      end
      rup = g & (st | m[0]);
      rnd = {1'b0, m} + {24'd0, rup};
      if (rnd[24]) begin
        rnd = rnd >> 1;
        e = e + 1;
      end
      if (e >= 255)     y = {s, 8'hff, 23'd0};
      else if (e <= 0)  y = {s, 31'd0};
      else              y = {s, 8'(e), rnd[22:0]};
    end
  end

endmodule
