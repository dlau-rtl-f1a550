// tb_dlau_top: end-to-end test of DLAU at its default parameters (tile of 32
// lanes). A behavioural memory holds the input stream; the test programs the
// accelerator over AXI4-Lite like the host processor would (sizes,
// addresses, sigmoid tables), starts it, polls CTRL.done and compares every
// result in memory with a real-valued model of the layer followed by the
// piecewise linear sigmoid, and with the true sigmoid.
// Runs: a layer with a partial last tile and fewer outputs than lanes under
// memory back-pressure; the paper's 64x64, 128x128 and 256x256 layers at
// full memory rate, where the run time in CYCLES is checked against
// ni*no (weight load) + batch*ceil(ni/32)*no (one Part Sum per cycle) plus
// a small latency; a one-output layer; and a one-tile layer whose results
// are written slowly, so that back-pressure reaches the TMMU; and two
// chained layers, the second reading the first one's results as its inputs. It counts how often each
// mechanism happened and fails if one never did: Reg_a/Reg_b alternation,
// masking of a partial tile, TMMU output stall, PSAU write-back bypass,
// DMA read throttling, refused memory requests and the four regions of
// the sigmoid.
module tb_dlau_top;
  import tb_fp_pkg::*;
  localparam int TILE = 32, NSEG = 16;
  localparam real K = 0.5;
  localparam int DST = 32'h1_0000;

  logic clk = 0, rst_n = 0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0]  s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic mem_rd_valid, mem_rd_ready, mem_rsp_valid, mem_wr_valid, mem_wr_ready, busy;
  logic [31:0] mem_rd_addr, mem_rsp_data, mem_wr_addr, mem_wr_data;
  int checks = 0, failures = 0;
  longint cyc = 0;
  logic [31:0] a_t[NSEG], b_t[NSEG];

  // mechanism counters
  int n_swap = 0, n_mask = 0, n_tstall = 0, n_bypass = 0, n_throttle = 0;
  int n_region[4];
  int n_chain = 0;

  dlau_top dut (.*);

  tb_mem_model #(.WORDS(1 << 17), .LAT(6), .READY_PCT(100)) mem (
    .clk, .rd_valid (mem_rd_valid), .rd_ready (mem_rd_ready), .rd_addr (mem_rd_addr),
    .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data),
    .wr_valid (mem_wr_valid), .wr_ready (mem_wr_ready), .wr_addr (mem_wr_addr),
    .wr_data (mem_wr_data));

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (dut.u_tmmu.issue && dut.u_tmmu.c_j == dut.u_tmmu.no - 1'b1) n_swap++;
      if (dut.u_tmmu.issue && dut.u_tmmu.x_len[dut.u_tmmu.csel] < 16'(TILE)) n_mask++;
      if (dut.u_tmmu.out_valid && !dut.u_tmmu.out_ready) n_tstall++;
      if (dut.u_psau.v1 && dut.u_psau.byp1) n_bypass++;
      if (dut.u_dma.rd_run && dut.u_dma.rd_left != 0 && !dut.u_dma.rd_req_valid) n_throttle++;
    end
  end

  function automatic real sigm(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real pwl(input real x);
    int i;
    real ax, t;
    if (x <= -8.0) begin n_region[0]++; return 0.0; end
    if (x > 8.0)   begin n_region[3]++; return 1.0; end
    ax = fabs(x);
    i = int'($floor(ax / K));
    if (i > NSEG - 1) i = NSEG - 1;
    t = fp_to_real(a_t[i]) * ax + fp_to_real(b_t[i]);
    if (x <= 0.0) begin n_region[1]++; return 1.0 - t; end
    n_region[2]++;
    return t;
  endfunction

  task automatic axi_write(input logic [7:0] addr, input logic [31:0] data);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = addr; s_wvalid = 1; s_wdata = data; s_wstrb = 4'hF; s_bready = 1;
    @(posedge clk);
    while (!(s_awready && s_wready)) @(posedge clk);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    while (!s_bvalid) @(posedge clk);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] addr, output logic [31:0] data);
    @(negedge clk);
    s_arvalid = 1; s_araddr = addr; s_rready = 1;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    @(negedge clk);
    s_arvalid = 0;
    while (!s_rvalid) @(posedge clk);
    data = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  // One layer: ni inputs, no outputs, nb vectors. wscale sets the weight range.
  task automatic run(input int ni, input int no, input int nb, input int ready_pct,
                     input real wscale, input bit timed);
    real w[][];
    real x[][];
    logic [31:0] d;
    int p, ntl, err_cnt;
    real max_err;
    w = new[ni]; foreach (w[i]) w[i] = new[no];
    x = new[nb]; foreach (x[n]) x[n] = new[ni];
    p = 0;
    foreach (w[i, j]) begin
      d = rne(wscale * ($urandom_range(2000) / 1000.0 - 1.0));
      w[i][j] = fp_to_real(d);
      mem.mem[p] = d; p++;
    end
    foreach (x[n, i]) begin
      d = rne($urandom_range(1000) / 1000.0);
      x[n][i] = fp_to_real(d);
      mem.mem[p] = d; p++;
    end
    mem.ready_pct = ready_pct;
    axi_write(8'h04, ni); axi_write(8'h08, no); axi_write(8'h0C, nb);
    axi_write(8'h10, 0);  axi_write(8'h14, DST);
    axi_write(8'h00, 1);
    do axi_read(8'h00, d); while (d[1] == 1'b0);
    axi_read(8'h20, d);
    ntl = (ni + TILE - 1) / TILE;
    $display("layer %0dx%0d batch %0d: %0d cycles (weights %0d + Part Sums %0d)",
             ni, no, nb, d, ni * no, nb * ntl * no);
    if (timed) begin
      checks++;
      if (d > ni * no + nb * ntl * no + 80) begin
        failures++;
        $display("FAIL run took %0d cycles", d);
      end
    end
    max_err = 0.0; err_cnt = 0;
    for (int n = 0; n < nb; n++)
      for (int j = 0; j < no; j++) begin
        real s, y, e;
        s = 0.0;
        for (int i = 0; i < ni; i++) s += w[i][j] * x[n][i];
        y = fp_to_real(mem.mem[DST + n * no + j]);
        e = pwl(s);
        checks++;
        if (fabs(y - e) > 1e-3 || fabs(y - sigm(s)) > 0.01) begin
          failures++; err_cnt++;
          if (err_cnt < 5) $display("FAIL y[%0d][%0d] = %g, model %g (sum %g)", n, j, y, e, s);
        end
        if (fabs(y - e) > max_err) max_err = fabs(y - e);
      end
    $display("  max deviation from the model: %g", max_err);
    // clear the result area for the next run
    for (int i = 0; i < nb * no; i++) mem.mem[DST + i] = 32'hFFFF_FFFF;
  endtask

  // Two chained layers: layer 1 (ni1 -> nh) writes its results right behind
  // the weights of layer 2 (nh -> no2), where they form layer 2's node
  // vectors, so layer 2 runs on layer 1's outputs without a copy.
  task automatic run_chain(input int ni1, input int nh, input int no2, input int nb);
    real w1[][], w2[][], x[][], h[][];
    logic [31:0] d;
    int base2, p;
    w1 = new[ni1]; foreach (w1[i]) w1[i] = new[nh];
    w2 = new[nh];  foreach (w2[i]) w2[i] = new[no2];
    x  = new[nb];  foreach (x[n]) x[n] = new[ni1];
    h  = new[nb];  foreach (h[n]) h[n] = new[nh];
    base2 = 32'h8000;
    p = 0;
    foreach (w1[i, j]) begin d = rne($urandom_range(2000) / 1000.0 - 1.0); w1[i][j] = fp_to_real(d); mem.mem[p] = d; p++; end
    foreach (x[n, i])  begin d = rne($urandom_range(1000) / 1000.0);       x[n][i]  = fp_to_real(d); mem.mem[p] = d; p++; end
    p = base2;
    foreach (w2[i, j]) begin d = rne($urandom_range(2000) / 1000.0 - 1.0); w2[i][j] = fp_to_real(d); mem.mem[p] = d; p++; end
    mem.ready_pct = 100;
    axi_write(8'h04, ni1); axi_write(8'h08, nh); axi_write(8'h0C, nb);
    axi_write(8'h10, 0);   axi_write(8'h14, base2 + nh * no2);
    axi_write(8'h00, 1);
    do axi_read(8'h00, d); while (d[1] == 1'b0);
    axi_write(8'h04, nh); axi_write(8'h08, no2);
    axi_write(8'h10, base2); axi_write(8'h14, DST);
    axi_write(8'h00, 1);
    do axi_read(8'h00, d); while (d[1] == 1'b0);
    n_chain++;
    for (int n = 0; n < nb; n++)
      for (int j = 0; j < nh; j++) begin
        real s;
        s = 0.0;
        for (int i = 0; i < ni1; i++) s += w1[i][j] * x[n][i];
        h[n][j] = pwl(s);
      end
    for (int n = 0; n < nb; n++)
      for (int j = 0; j < no2; j++) begin
        real s, y, e;
        s = 0.0;
        for (int i = 0; i < nh; i++) s += w2[i][j] * h[n][i];
        y = fp_to_real(mem.mem[DST + n * no2 + j]);
        e = pwl(s);
        checks++;
        if (fabs(y - e) > 2e-3) begin
          failures++;
          $display("FAIL chained y[%0d][%0d] = %g, model %g", n, j, y, e);
        end
      end
    $display("two chained layers %0dx%0dx%0d batch %0d checked", ni1, nh, no2, nb);
  endtask

  initial begin
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    for (int i = 0; i < NSEG; i++) begin
      real x0, sl;
      x0 = i * K;
      sl = (sigm(x0 + K) - sigm(x0)) / K;
      a_t[i] = rne(sl);
      b_t[i] = rne(sigm(x0) - sl * x0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(8'h18, 32'h000);
    for (int i = 0; i < NSEG; i++) axi_write(8'h1C, a_t[i]);
    axi_write(8'h18, 32'h100);
    for (int i = 0; i < NSEG; i++) axi_write(8'h1C, b_t[i]);

    run(40, 24, 3, 50, 2.0, 0);     // partial tile, no < TILE, refused requests
    run(64, 64, 4, 100, 1.0, 1);
    run(128, 128, 4, 100, 1.0, 1);
    run(256, 256, 4, 100, 1.0, 1);
    run(33, 1, 3, 80, 2.0, 0);      // one output neuron
    run(32, 96, 4, 25, 2.0, 0);     // one tile, slow result writes: back-pressure
    run_chain(96, 48, 10, 3);       // layer outputs reused as the next layer's inputs

    $display("mechanisms: swaps %0d, masked tiles %0d, TMMU stalls %0d, PSAU bypass %0d, DMA throttle %0d, refused reads %0d",
             n_swap, n_mask, n_tstall, n_bypass, n_throttle, mem.rd_stalls);
    $display("sigmoid regions: x<=-8 %0d, -8<x<=0 %0d, 0<x<=8 %0d, x>8 %0d",
             n_region[0], n_region[1], n_region[2], n_region[3]);
    checks++; if (n_swap == 0)        begin failures++; $display("FAIL no Reg_a/Reg_b swap"); end
    checks++; if (n_mask == 0)        begin failures++; $display("FAIL no partial tile"); end
    checks++; if (n_tstall == 0)      begin failures++; $display("FAIL no TMMU stall"); end
    checks++; if (n_bypass == 0)      begin failures++; $display("FAIL no PSAU bypass"); end
    checks++; if (n_throttle == 0)    begin failures++; $display("FAIL no DMA throttling"); end
    checks++; if (n_chain == 0)       begin failures++; $display("FAIL no chained layers"); end
    checks++; if (mem.rd_stalls == 0) begin failures++; $display("FAIL no refused read"); end
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (n_region[r] == 0) begin failures++; $display("FAIL sigmoid region %0d never used", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
