// fp32_add: combinational IEEE-754 single-precision adder, y = a + b.
//
// Round to nearest even. Subnormal inputs are read as zero and results below the smallest
// normal are flushed to (signed) zero; NaN results are the canonical quiet NaN. Both choices
// are this design's own: the paper only says that the unit accumulates in fp32.
// Structure: swap so that |A| >= |B|, align B with guard/round/sticky bits, add or subtract
// the 24-bit significands, normalise (one right shift or a leading-zero left shift), round.
// Purely combinational, no clock.
module fp32_add
  import simd2_pkg::*;
(
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);

  always_comb begin
    logic        sa, sb, sl, ss;
    logic [7:0]  ea, eb, el, es;
    logic [23:0] ma, mb, ml, ms;
    logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
    logic [8:0]  d;
    logic [26:0] xl, xs;
    logic [27:0] sum;
    logic [26:0] nrm;
    int          lz;
    int          e;
    logic        rup;
    logic [24:0] rnd;

    sa = a[31]; ea = a[30:23];
    sb = b[31]; eb = b[30:23];
    a_nan  = (ea == 8'hff) && (a[22:0] != 0);
    b_nan  = (eb == 8'hff) && (b[22:0] != 0);
    a_inf  = (ea == 8'hff) && (a[22:0] == 0);
    b_inf  = (eb == 8'hff) && (b[22:0] == 0);
    a_zero = (ea == 8'h00);
    b_zero = (eb == 8'h00);
    ma = {1'b1, a[22:0]};
    mb = {1'b1, b[22:0]};
    y  = 32'd0;
    lz = 0; e = 0; rup = 1'b0; rnd = '0; nrm = '0; sum = '0;
    xl = '0; xs = '0; d = '0;
    sl = sa; ss = sb; el = ea; es = eb; ml = ma; ms = mb;

    if (a_nan || b_nan || (a_inf && b_inf && (sa != sb))) begin
      y = FP32_QNAN;
    end else if (a_inf) begin
      y = {sa, 8'hff, 23'd0};
    end else if (b_inf) begin
      y = {sb, 8'hff, 23'd0};
    end else if (a_zero && b_zero) begin
      y = {sa & sb, 31'd0};
    end else if (a_zero) begin
      y = b;
    end else if (b_zero) begin
      y = a;
    end else begin
      // order operands by magnitude
      if ({eb, b[22:0]} > {ea, a[22:0]}) begin
        sl = sb; el = eb; ml = mb;
        ss = sa; es = ea; ms = ma;
      end
      d  = {1'b0, el} - {1'b0, es};
      xl = {ml, 3'b000};
      if (d >= 9'd27) begin
        xs = 27'd1;                                    // only the sticky bit survives
      end else begin
        xs = {ms, 3'b000} >> d;
        if ((({ms, 3'b000} & ((27'd1 << d) - 27'd1))) != 0) xs[0] = 1'b1;
      end
      e = int'(el);
      if (sl == ss) begin
        sum = {1'b0, xl} + {1'b0, xs};
        if (sum[27]) begin
          nrm = sum[27:1];
          nrm[0] = sum[1] | sum[0];
          e = e + 1;
        end else begin
          nrm = sum[26:0];
        end
      end else begin
        sum = {1'b0, xl} - {1'b0, xs};
        nrm = sum[26:0];
        lz = 0;
        for (int i = 0; i < 27; i++) if (nrm[i]) lz = 26 - i;
        nrm = nrm << lz;
        e = e - lz;
      end
      if (sum == 28'd0) begin
        y = 32'd0;                                     // exact cancellation gives +0
      end else begin
        rup = nrm[2] & (nrm[1] | nrm[0] | nrm[3]);
        rnd = {1'b0, nrm[26:3]} + {24'd0, rup};
        if (rnd[24]) begin
          rnd = rnd >> 1;
          e = e + 1;
        end
        if (e >= 255)     y = {sl, 8'hff, 23'd0};
        else if (e <= 0)  y = {sl, 31'd0};
        else              y = {sl, 8'(e), rnd[22:0]};
      end
    end
  end

endmodule
