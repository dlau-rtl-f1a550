// fp_mul: IEEE-754 single-precision multiplier, combinational.
//
// The paper builds DLAU from floating-point multipliers and adders (its
// resource table attributes the DSP use to them) but gives no detail, so this
// is a plain implementation: the 24x24-bit significand product is normalised
// by at most one position and rounded to nearest, ties to even. Subnormal
// inputs and results are flushed to zero (a choice of this design). Infinities
// propagate; NaN, or infinity times zero, gives the quiet NaN 7FC00000.
// Interface: y = a * b, no clock; pipeline registers are added by the user.
module fp_mul
  import dlau_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sa, sb, sy;
  logic [7:0]  ea, eb;
  logic [22:0] fa, fb;
  logic [47:0] p;
  logic [9:0]  e;          // signed biased exponent with room for over/underflow
  logic [23:0] m;          // 1 + 23 fraction bits after normalisation
  logic        g, st, up;
  logic [24:0] mr;         // rounded significand with carry
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    sa = a[31]; ea = a[30:23]; fa = a[22:0];
    sb = b[31]; eb = b[30:23]; fb = b[22:0];
    sy = sa ^ sb;
    a_zero = (ea == 8'd0);
    b_zero = (eb == 8'd0);
    a_inf  = (ea == 8'hFF) && (fa == '0);
    b_inf  = (eb == 8'hFF) && (fb == '0);
    a_nan  = (ea == 8'hFF) && (fa != '0);
    b_nan  = (eb == 8'hFF) && (fb != '0);

    p = {1'b1, fa} * {1'b1, fb};
    e = {2'b00, ea} + {2'b00, eb} - 10'd127;
    if (p[47]) begin
      m  = p[47:24];
      g  = p[23];
      st = |p[22:0];
      e  = e + 10'd1;
    end else begin
      m  = p[46:23];
      g  = p[22];
      st = |p[21:0];
    end
    up = g & (st | m[0]);
    mr = {1'b0, m} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'd1;
    end

    if (a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero)) begin
      y = FP_QNAN;
    end else if (a_inf || b_inf) begin
      y = {sy, 8'hFF, 23'd0};
    end else if (a_zero || b_zero) begin
      y = {sy, 31'd0};
    end else if (e[9] || e == 10'd0) begin
      y = {sy, 31'd0};                      // underflow: flush to zero
    end else if (e >= 10'd255) begin
      y = {sy, 8'hFF, 23'd0};               // overflow: infinity
    end else begin
      y = {sy, e[7:0], mr[22:0]};
    end
  end

endmodule
