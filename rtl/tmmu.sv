// tmmu: Tiled Matrix Multiplication Unit of DLAU.
//
// Computes, for every input vector x[n] of a batch and every tile of TILE
// input neurons k..k+TILE-1, the Part Sums  p[n][k][j] = sum_i w[i][j]*x[n][i]
// for all output neurons j, one Part Sum per clock cycle (Algorithm 1 of the
// paper without the accumulation over tiles, which the PSAU does).
//
// Following the paper (Sec. III-A, Fig. 2):
//  * The weight matrix is first read from the input stream into TILE weight
//    memories (BRAM banks): row i goes to bank i % TILE. Within a bank, row i
//    column j sits at address (i / TILE) * no + j, so one address selects the
//    TILE weights of one tile for one output neuron.
//  * Node values are then read from the same stream into two register sets,
//    Reg_a and Reg_b. While one set is multiplied against the weights of all
//    output neurons (no cycles), the next tile is read into the other set,
//    one value per cycle; the two sets alternate.
//  * TILE floating-point multipliers feed a pipelined binary adder tree of
//    log2(TILE) levels, so one Part Sum leaves every cycle.
// This design's choices: the stream carries ni*no weights in row-major order
// (w[0][0..no-1], w[1][0..no-1], ...) followed by batch*ni node values in
// order x[0][0..ni-1], x[1][0..ni-1], ...; a last tile shorter than TILE is
// handled by masking the unused lanes to zero; the whole pipeline stalls when
// the Part Sum output is not accepted. The Part Sums leave in the order
// n, then tile, then j.
// Timing: weight load takes ni*no cycles; then, with no >= TILE and a stream
// that keeps up, batch*ceil(ni/TILE)*no cycles plus a latency of
// 2 + log2(TILE) cycles. The weights must fit: ceil(ni/TILE)*no <= WDEPTH.
module tmmu
  import dlau_pkg::*;
#(
  parameter int unsigned TILE   = 32,    // lanes; "Tile size=32"
  parameter int unsigned WDEPTH = 2048,  // words per weight bank
  parameter int unsigned CW     = 16     // width of the size registers
) (
  input  logic          clk,
  input  logic          rst_n,
  // configuration, sampled at start
  input  logic          start,
  input  logic [CW-1:0] cfg_ni,
  input  logic [CW-1:0] cfg_no,
  input  logic [CW-1:0] cfg_batch,
  output logic          busy,
  output logic          done,          // one-cycle pulse when the last Part Sum has left
  // input stream (weights, then node values)
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         in_data,
  // Part Sum output stream
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_data
);

  localparam int unsigned LOG = $clog2(TILE);
  localparam int unsigned LW  = (TILE > 1) ? $clog2(TILE) : 1;
  localparam int unsigned AW  = $clog2(WDEPTH);
  localparam int unsigned NST = 2 + LOG;   // pipeline stages after issue

  typedef enum logic [1:0] {S_IDLE, S_LOAD_W, S_RUN} state_e;
  state_e state;

  logic [CW-1:0] ni, no, nbatch;

  // ---------------------------------------------------------------- weights
  logic [LW-1:0] w_lane;     // i % TILE
  logic [AW-1:0] w_base;     // (i / TILE) * no
  logic [CW-1:0] w_j, w_i;
  logic          w_we;

  // ------------------------------------------------------------ node tiles
  fp32_t         xreg [2][TILE];   // [0] = Reg_a, [1] = Reg_b
  logic [1:0]    x_full;
  logic [CW-1:0] x_len [2];
  logic          fsel, csel;
  logic [CW-1:0] f_lane, f_rem, f_n;   // f_rem: inputs left in the vector being read
  logic          f_done;
  logic [CW-1:0] f_tlen;
  logic          x_we;

  // -------------------------------------------------------------- compute
  logic [CW-1:0] c_j, c_rem, c_n;
  logic [AW-1:0] c_base;
  logic          c_done;
  logic          issue, adv;
  logic [NST-1:0] vld;

  // Pipeline stage 1: weight read, node values and lane mask
  fp32_t      w_rd  [TILE];
  fp32_t      x_s1  [TILE];
  logic [TILE-1:0] m_s1;
  // Stage 2 and the adder tree: heap-ordered nodes, leaves TILE-1..2*TILE-2
  fp32_t      tree  [2*TILE-1];

  assign adv      = !vld[NST-1] || out_ready;
  assign out_valid = vld[NST-1];
  assign out_data  = tree[0];
  assign busy      = (state != S_IDLE);

  assign f_tlen   = (f_rem >= CW'(TILE)) ? CW'(TILE) : f_rem;
  assign w_we     = (state == S_LOAD_W) && in_valid;
  assign x_we     = (state == S_RUN) && !f_done && !x_full[fsel] && in_valid;
  assign in_ready = (state == S_LOAD_W) || ((state == S_RUN) && !f_done && !x_full[fsel]);
  assign issue    = (state == S_RUN) && !c_done && x_full[csel] && adv;

  // ------------------------------------------------------- weight banks
  for (genvar l = 0; l < TILE; l++) begin : g_bank
    fp32_t mem [WDEPTH];
    always_ff @(posedge clk) begin
      if (w_we && w_lane == LW'(l)) mem[w_base + AW'(w_j)] <= in_data;
      if (adv) w_rd[l] <= mem[c_base + AW'(c_j)];
    end
  end

  // -------------------------------------------- multipliers and adder tree
  for (genvar l = 0; l < TILE; l++) begin : g_mul
    fp32_t prod;
    fp_mul u_mul (.a(x_s1[l]), .b(w_rd[l]), .y(prod));
    always_ff @(posedge clk) begin
      if (adv) tree[TILE-1+l] <= m_s1[l] ? prod : FP_ZERO;
    end
  end

  for (genvar n = 0; n < TILE-1; n++) begin : g_add
    fp32_t sum;
    fp_add u_add (.a(tree[2*n+1]), .b(tree[2*n+2]), .y(sum));
    always_ff @(posedge clk) begin
      if (adv) tree[n] <= sum;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      for (int l = 0; l < TILE; l++) begin
        x_s1[l] <= xreg[csel][l];
        m_s1[l] <= (CW'(l) < x_len[csel]);
      end
    end
    if (x_we) xreg[fsel][f_lane[LW-1:0]] <= in_data;
  end

  // ------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      ni     <= '0;
      no     <= '0;
      nbatch <= '0;
      w_lane <= '0; w_base <= '0; w_j <= '0; w_i <= '0;
      x_full <= '0; x_len[0] <= '0; x_len[1] <= '0;
      fsel   <= 1'b0; csel <= 1'b0;
      f_lane <= '0; f_rem <= '0; f_n <= '0; f_done <= 1'b0;
      c_j    <= '0; c_rem <= '0; c_n <= '0; c_base <= '0; c_done <= 1'b0;
      vld    <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (adv) vld <= {vld[NST-2:0], issue};

      unique case (state)
        S_IDLE: begin
          if (start) begin
            ni     <= cfg_ni;
            no     <= cfg_no;
            nbatch <= cfg_batch;
            w_lane <= '0; w_base <= '0; w_j <= '0; w_i <= '0;
            x_full <= '0; fsel <= 1'b0; csel <= 1'b0;
            f_lane <= '0; f_rem <= cfg_ni; f_n <= '0;
            f_done <= (cfg_batch == '0) || (cfg_ni == '0);
            c_j    <= '0; c_rem <= cfg_ni; c_n <= '0; c_base <= '0;
            c_done <= (cfg_batch == '0) || (cfg_ni == '0) || (cfg_no == '0);
            state  <= (cfg_ni == '0 || cfg_no == '0) ? S_RUN : S_LOAD_W;
          end
        end

        S_LOAD_W: begin
          if (w_we) begin
            if (w_j == no - 1'b1) begin
              w_j <= '0;
              w_i <= w_i + 1'b1;
              if (w_lane == LW'(TILE-1)) begin
                w_lane <= '0;
                w_base <= w_base + AW'(no);
              end else begin
                w_lane <= w_lane + 1'b1;
              end
              if (w_i == ni - 1'b1) state <= S_RUN;
            end else begin
              w_j <= w_j + 1'b1;
            end
          end
        end

        S_RUN: begin
          // fill the free register set, one node value per cycle
          if (x_we) begin
            if (f_lane == f_tlen - 1'b1) begin
              x_full[fsel] <= 1'b1;
              x_len[fsel]  <= f_tlen;
              fsel         <= ~fsel;
              f_lane       <= '0;
              if (f_rem == f_tlen) begin           // last tile of this vector
                f_rem <= ni;
                f_n   <= f_n + 1'b1;
                if (f_n == nbatch - 1'b1) f_done <= 1'b1;
              end else begin
                f_rem <= f_rem - f_tlen;
              end
            end else begin
              f_lane <= f_lane + 1'b1;
            end
          end
          // issue one output neuron per cycle from the full register set
          if (issue) begin
            if (c_j == no - 1'b1) begin
              c_j          <= '0;
              x_full[csel] <= 1'b0;
              csel         <= ~csel;
              if (c_rem <= CW'(TILE)) begin       // last tile of this vector
                c_rem  <= ni;
                c_base <= '0;
                c_n    <= c_n + 1'b1;
                if (c_n == nbatch - 1'b1) c_done <= 1'b1;
              end else begin
                c_rem  <= c_rem - CW'(TILE);
                c_base <= c_base + AW'(no);
              end
            end else begin
              c_j <= c_j + 1'b1;
            end
          end
          if (c_done && vld == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // The TILE lanes must form a complete binary adder tree.
  initial assert ((1 << LOG) == TILE) else $error("TILE must be a power of two");

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
