// psau: Part Sum Accumulation Unit of DLAU.
//
// The TMMU delivers, for each input vector, ceil(ni/TILE) rounds of no Part
// Sums (one per output neuron j). The PSAU adds the Part Sums of a neuron
// over those rounds in an accumulator memory (one BRAM, Fig. 3 of the paper):
// the Part Sum taken from the input is added to the value stored for j, the
// sum is written back, and in the last round it is also passed on to the
// output, towards the AFAU. One Part Sum is accepted per clock cycle.
// This design's choices: the unit counts j, rounds and vectors itself from
// the sizes given at start (the stream carries no tags); in the first round
// the stored value is ignored instead of clearing the memory; a Part Sum of
// the same neuron that follows the previous one directly (no = 1) takes the
// sum from a bypass register, as the memory write is still in flight.
// Pipeline: accept and memory read; add and write back; output register.
// Latency 2 cycles; the whole pipeline stalls while the output is refused.
module psau
  import dlau_pkg::*;
#(
  parameter int unsigned TILE  = 32,
  parameter int unsigned DEPTH = 1024,  // accumulator words (one BRAM), >= no
  parameter int unsigned CW    = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] cfg_ni,
  input  logic [CW-1:0] cfg_no,
  input  logic [CW-1:0] cfg_batch,
  output logic          busy,
  output logic          done,
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_data
);

  localparam int unsigned AW = $clog2(DEPTH);

  logic [CW-1:0] no, nbatch, ntiles;
  logic [CW-1:0] j, k, n;
  logic          running;
  logic          adv, take;

  fp32_t         acc [DEPTH];
  fp32_t         rd;

  // stage 1: operands
  logic          v1, first1, last1, byp1;
  logic [AW-1:0] j1;
  fp32_t         ps1;
  fp32_t         sum1, add1, prev_sum;
  // stage 2: output register
  logic          v2;
  fp32_t         y2;

  assign adv      = !v2 || out_ready;
  assign in_ready = running && adv;
  assign take     = in_valid && in_ready;
  assign busy     = running || v1 || v2;
  assign out_valid = v2;
  assign out_data  = y2;

  fp_add u_add (.a(ps1), .b(byp1 ? prev_sum : rd), .y(add1));
  assign sum1 = first1 ? ps1 : add1;

  always_ff @(posedge clk) begin
    if (take) rd <= acc[AW'(j)];
    if (v1 && adv) begin
      acc[j1]  <= sum1;
      prev_sum <= sum1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      no <= '0; nbatch <= '0; ntiles <= '0;
      j <= '0; k <= '0; n <= '0;
      running <= 1'b0;
      v1 <= 1'b0; first1 <= 1'b0; last1 <= 1'b0; byp1 <= 1'b0; j1 <= '0; ps1 <= '0;
      v2 <= 1'b0; y2 <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !running) begin
        no      <= cfg_no;
        nbatch  <= cfg_batch;
        ntiles  <= CW'((32'(cfg_ni) + TILE - 1) / TILE);
        j <= '0; k <= '0; n <= '0;
        running <= (cfg_no != '0) && (cfg_batch != '0) && (cfg_ni != '0);
        done    <= (cfg_no == '0) || (cfg_batch == '0) || (cfg_ni == '0);
      end
      if (adv) begin
        v1     <= take;
        ps1    <= in_data;
        j1     <= AW'(j);
        first1 <= (k == '0);
        last1  <= (k == ntiles - 1'b1);
        byp1   <= v1 && (j1 == AW'(j));
        v2     <= v1 && last1;
        y2     <= sum1;
      end
      if (take) begin
        if (j == no - 1'b1) begin
          j <= '0;
          if (k == ntiles - 1'b1) begin
            k <= '0;
            n <= n + 1'b1;
            if (n == nbatch - 1'b1) begin
              running <= 1'b0;
              done    <= 1'b1;
            end
          end else begin
            k <= k + 1'b1;
          end
        end else begin
          j <= j + 1'b1;
        end
      end
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
