// fp_add: IEEE-754 single-precision adder, combinational.
//
// Used for the adder tree of the TMMU, the accumulator of the PSAU and the
// interpolation of the AFAU. The paper only says that floating-point adders
// are used; this is a textbook implementation. The operands are ordered by
// magnitude, the smaller significand is aligned with guard, round and sticky
// bits, added or subtracted, normalised (one step right, or left by the count
// of leading zeros) and rounded to nearest, ties to even. Subnormals are
// flushed to zero; an exact zero result is +0. inf - inf gives the quiet NaN.
// Interface: y = a + b, no clock.
module fp_add
  import dlau_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  output fp32_t y
);

  logic        sx, sz;
  logic [7:0]  ex, ez;
  logic [22:0] fx, fz;
  logic [7:0]  d;
  logic [26:0] mx, mz, mz_sh;  // hidden bit, 23 fraction bits, guard, round, sticky
  logic [27:0] s;
  logic [9:0]  e;
  logic [4:0]  lz;
  logic        up;
  logic [24:0] mr;
  logic        x_special, z_special;

  // Count of leading zeros of a 27-bit value (27 for zero).
  function automatic logic [4:0] clz27(input logic [26:0] v);
    logic [4:0] n;
    logic       found;
    n = 5'd27;
    found = 1'b0;
    for (int i = 26; i >= 0; i--) begin
      if (!found && v[i]) begin
        n = 5'(26 - i);
        found = 1'b1;
      end
    end
    return n;
  endfunction

  always_comb begin
    // x is the operand of larger magnitude
    if (a[30:0] >= b[30:0]) begin
      sx = a[31]; ex = a[30:23]; fx = a[22:0];
      sz = b[31]; ez = b[30:23]; fz = b[22:0];
    end else begin
      sx = b[31]; ex = b[30:23]; fx = b[22:0];
      sz = a[31]; ez = a[30:23]; fz = a[22:0];
    end
    x_special = (ex == 8'hFF);
    z_special = (ez == 8'hFF);

    mx = {1'b1, fx, 3'b000};
    mz = (ez == 8'd0) ? 27'd0 : {1'b1, fz, 3'b000};
    d  = ex - ez;
    if (d > 8'd26) begin
      mz_sh = {26'd0, |mz};
    end else begin
      mz_sh = mz >> d;
      if ((mz & ~(27'h7FF_FFFF << d)) != 27'd0) mz_sh[0] = 1'b1;
    end

    e  = {2'b00, ex};
    lz = 5'd0;
    if (sx == sz) begin
      s = {1'b0, mx} + {1'b0, mz_sh};
      if (s[27]) begin
        s = {1'b0, s[27:2], s[1] | s[0]};
        e = e + 10'd1;
      end
    end else begin
      s  = {1'b0, mx} - {1'b0, mz_sh};
      lz = clz27(s[26:0]);
      if (lz != 5'd27) begin
        s = s << lz;
        e = e - {5'd0, lz};
      end
    end

    up = s[2] & (s[1] | s[0] | s[3]);
    mr = {1'b0, s[26:3]} + {24'd0, up};
    if (mr[24]) begin
      mr = mr >> 1;
      e  = e + 10'd1;
    end

    if (x_special || z_special) begin
      if ((ex == 8'hFF && fx != '0) || (ez == 8'hFF && fz != '0)) y = FP_QNAN;
      else if (x_special && z_special && sx != sz)               y = FP_QNAN;
      else                                                        y = {sx, 8'hFF, 23'd0};
    end else if (ex == 8'd0) begin
      y = FP_ZERO;                           // both operands zero (or subnormal)
    end else if (lz == 5'd27) begin
      y = FP_ZERO;                           // exact cancellation
    end else if (e[9] || e == 10'd0) begin
      y = {sx, 31'd0};                       // underflow: flush to zero
    end else if (e >= 10'd255) begin
      y = {sx, 8'hFF, 23'd0};
    end else begin
      y = {sx, e[7:0], mr[22:0]};
    end
  end

endmodule
