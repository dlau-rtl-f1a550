// afau: Activation Function Acceleration Unit of DLAU (sigmoid).
//
// Implements Eq. (1) of the paper, a piecewise linear sigmoid:
//   f(x) = 0                             x <= -8
//   f(x) = 1 + a[floor(-x/k)]*x - b[floor(-x/k)]   -8 < x <= 0
//   f(x) = a[floor(x/k)]*x + b[floor(x/k)]         0 < x <= 8
//   f(x) = 1                             x > 8
// The slopes a and intercepts b sit in two separate table memories (BRAMs),
// written by the host through the tbl_* port. For x <= 0 the unit forms
// t = a*|x| + b and returns 1 - t, which equals the second line of Eq. (1).
// This design's choices: the interval is k = 2^-KSHIFT with NSEG segments
// per side (defaults k = 0.5, 16 segments, covering 0..8); x = 8 uses the
// last segment; -0 and +0 take the x <= 0 line; the tables are not reset.
// Pipeline (one result per cycle): index and table read; a*|x|; add b and
// select the result; output register. Latency 3 cycles; stalls while the
// output is refused.
module afau
  import dlau_pkg::*;
#(
  parameter int unsigned NSEG   = 16,
  parameter int unsigned KSHIFT = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // coefficient table write port
  input  logic                    tbl_we,
  input  logic                    tbl_sel,     // 0: a, 1: b
  input  logic [$clog2(NSEG)-1:0] tbl_addr,
  input  fp32_t                   tbl_data,
  // input and output streams
  input  logic                    in_valid,
  output logic                    in_ready,
  input  fp32_t                   in_data,
  output logic                    out_valid,
  input  logic                    out_ready,
  output fp32_t                   out_data
);

  localparam int unsigned IW = $clog2(NSEG);
  localparam fp32_t FP_EIGHT = 32'h4100_0000;

  typedef enum logic [1:0] {R_ZERO, R_NEG, R_POS, R_ONE} region_e;

  fp32_t a_mem [NSEG];
  fp32_t b_mem [NSEG];

  logic    adv;
  // stage 0 (combinational on the input)
  logic [IW-1:0] idx0;
  region_e       reg0;
  // stage 1
  logic    v1;
  region_e r1;
  fp32_t   ax1, a_rd, b_rd;
  // stage 2
  logic    v2;
  region_e r2;
  fp32_t   prod, prod2, b2;
  // stage 3
  logic    v3;
  fp32_t   y3, t2, omt2;

  assign adv       = !v3 || out_ready;
  assign in_ready  = adv;
  assign out_valid = v3;
  assign out_data  = y3;

  // floor(|x| / k), clamped to the table
  function automatic logic [IW-1:0] seg_index(input fp32_t x);
    int unsigned e;
    logic [31:0] m;
    logic [31:0] q;
    e = int'(x[30:23]) + KSHIFT;
    m = {8'd0, 1'b1, x[22:0]};
    if (x[30:23] == 8'd0 || e < 127) q = 0;
    else if (e - 127 > 23) q = 32'hFFFF_FFFF;
    else q = m >> (23 - (e - 127));
    return (q >= NSEG) ? IW'(NSEG - 1) : IW'(q);
  endfunction

  always_comb begin
    idx0 = seg_index(in_data);
    if (in_data[31] && in_data[30:0] >= FP_EIGHT[30:0])      reg0 = R_ZERO;
    else if (!in_data[31] && in_data[30:0] > FP_EIGHT[30:0]) reg0 = R_ONE;
    else if (in_data[31] || in_data[30:0] == '0)             reg0 = R_NEG;
    else                                                     reg0 = R_POS;
  end

  always_ff @(posedge clk) begin
    if (tbl_we && !tbl_sel) a_mem[tbl_addr] <= tbl_data;
    if (tbl_we &&  tbl_sel) b_mem[tbl_addr] <= tbl_data;
    if (adv) begin
      a_rd <= a_mem[idx0];
      b_rd <= b_mem[idx0];
    end
  end

  fp_mul u_mul (.a(a_rd), .b(ax1), .y(prod));
  fp_add u_add (.a(prod2), .b(b2), .y(t2));
  fp_add u_sub (.a(FP_ONE), .b({~t2[31], t2[30:0]}), .y(omt2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0;
      r1 <= R_ZERO; r2 <= R_ZERO;
      ax1 <= '0; prod2 <= '0; b2 <= '0; y3 <= '0;
    end else if (adv) begin
      v1    <= in_valid;
      r1    <= reg0;
      ax1   <= {1'b0, in_data[30:0]};
      v2    <= v1;
      r2    <= r1;
      prod2 <= prod;
      b2    <= b_rd;
      v3    <= v2;
      unique case (r2)
        R_ZERO:  y3 <= FP_ZERO;
        R_ONE:   y3 <= FP_ONE;
        R_NEG:   y3 <= omt2;
        default: y3 <= t2;
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
