// tb_tmmu: drives the TMMU with a weight matrix and a batch of node vectors
// and checks every Part Sum against a real-valued reference. Runs (a) a
// layer whose input count is not a multiple of the tile (partial last
// tile) with random gaps on the input and random back-pressure on the
// output, then (b) a full-rate layer, where it checks that one Part Sum
// leaves per cycle after the weight load, and that the whole run takes
// ni*no + batch*ntiles*no cycles plus the pipeline latency.
module tb_tmmu;
  import tb_fp_pkg::*;
  localparam int TILE = 8, WDEPTH = 64, CW = 16;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [CW-1:0] cfg_ni, cfg_no, cfg_batch;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0;
  int cyc = 0;

  tmmu #(.TILE(TILE), .WDEPTH(WDEPTH), .CW(CW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] stream[$];
  real         refv[$];
  real         mag[$];
  int          n_seen, first_out, last_out, in_pct, out_pct;

  task automatic run(input int ni, input int no, input int nb, input int ipct, input int opct);
    logic [31:0] w[][];
    logic [31:0] x[][];
    int ntl, t0;
    stream.delete(); refv.delete(); mag.delete();
    w = new[ni]; foreach (w[i]) w[i] = new[no];
    x = new[nb]; foreach (x[n]) x[n] = new[ni];
    foreach (w[i, j]) w[i][j] = rand_fp(2);
    foreach (x[n, i]) x[n][i] = rand_fp(2);
    foreach (w[i, j]) stream.push_back(w[i][j]);
    foreach (x[n, i]) stream.push_back(x[n][i]);
    ntl = (ni + TILE - 1) / TILE;
    for (int n = 0; n < nb; n++)
      for (int k = 0; k < ntl; k++)
        for (int j = 0; j < no; j++) begin
          real s, m;
          s = 0.0; m = 0.0;
          for (int i = k * TILE; i < k * TILE + TILE && i < ni; i++) begin
            s += fp_to_real(w[i][j]) * fp_to_real(x[n][i]);
            m += fabs(fp_to_real(w[i][j]) * fp_to_real(x[n][i]));
          end
          refv.push_back(s); mag.push_back(m);
        end
    in_pct = ipct; out_pct = opct;
    n_seen = 0;
    @(negedge clk);
    cfg_ni = CW'(ni); cfg_no = CW'(no); cfg_batch = CW'(nb); start = 1;
    t0 = cyc;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (refv.size() != 0) begin
      failures++;
      $display("FAIL %0d Part Sums missing", refv.size());
    end
    if (ipct == 100 && opct == 100) begin
      checks++;
      if (last_out - first_out != nb * ntl * no - 1) begin
        failures++;
        $display("FAIL Part Sums spread over %0d cycles, expected %0d", last_out - first_out + 1, nb * ntl * no);
      end
      checks++;
      if (cyc - t0 > ni * no + nb * ntl * no + TILE + 2 + $clog2(TILE) + 4) begin
        failures++;
        $display("FAIL run took %0d cycles", cyc - t0);
      end
      $display("run %0dx%0d batch %0d: %0d cycles, %0d Part Sums", ni, no, nb, cyc - t0, nb * ntl * no);
    end
  endtask

  // input driver
  always @(negedge clk) begin
    in_valid  <= (stream.size() != 0) && ($urandom_range(99) < in_pct);
    in_data   <= (stream.size() != 0) ? stream[0] : 32'd0;
    out_ready <= ($urandom_range(99) < out_pct);
  end
  always @(posedge clk) begin
    if (in_valid && in_ready) void'(stream.pop_front());
    if (rst_n && out_valid && out_ready) begin
      real got, e;
      got = fp_to_real(out_data);
      e = refv.pop_front();
      checks++;
      if (fabs(got - e) > 1e-5 * mag.pop_front() + 1e-30) begin
        failures++;
        if (failures < 10) $display("FAIL Part Sum %0d: %g expected %g", n_seen, got, e);
      end
      if (n_seen == 0) first_out = cyc;
      last_out = cyc;
      n_seen++;
    end
  end

  initial begin
    start = 0; cfg_ni = 0; cfg_no = 0; cfg_batch = 0;
    in_pct = 0; out_pct = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(21, 5, 3, 70, 60);     // partial tile, no < TILE, gaps and back-pressure
    run(16, 12, 4, 100, 100);  // full rate
    run(8, 3, 2, 100, 50);     // single tile, short rows
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
