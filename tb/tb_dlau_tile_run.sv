// tb_dlau_tile_run: runs one layer through a DLAU built with a given tile
// size and reports the result checks and the run time in cycles. Used by
// tb_dlau_tiles to compare tile sizes; not a testbench by itself.
module tb_dlau_tile_run #(
  parameter int TILE = 8,
  parameter int NI   = 128,
  parameter int NO   = 128,
  parameter int NB   = 4
) (
  output logic finished,
  output int   checks,
  output int   failures,
  output int   run_cycles
);
  import tb_fp_pkg::*;
  localparam int NSEG = 16;
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
  longint cyc = 0;
  logic [31:0] a_t[NSEG], b_t[NSEG];

  dlau_top #(.TILE(TILE)) dut (.*);

  tb_mem_model #(.WORDS(1 << 17), .LAT(6), .READY_PCT(100)) mem (
    .clk, .rd_valid (mem_rd_valid), .rd_ready (mem_rd_ready), .rd_addr (mem_rd_addr),
    .rsp_valid (mem_rsp_valid), .rsp_data (mem_rsp_data),
    .wr_valid (mem_wr_valid), .wr_ready (mem_wr_ready), .wr_addr (mem_wr_addr),
    .wr_data (mem_wr_data));

  always #5 clk = ~clk;

  always @(posedge clk) cyc <= cyc + 1;

  function automatic real sigm(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic real pwl(input real x);
    int i;
    real ax, t;
    if (x <= -8.0) return 0.0;
    if (x > 8.0)   return 1.0;
    ax = fabs(x);
    i = int'($floor(ax / K));
    if (i > NSEG - 1) i = NSEG - 1;
    t = fp_to_real(a_t[i]) * ax + fp_to_real(b_t[i]);
    if (x <= 0.0) return 1.0 - t;
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
    $display("tile %0d, layer %0dx%0d batch %0d: %0d cycles (weights %0d + Part Sums %0d)",
             TILE, ni, no, nb, d, ni * no, nb * ntl * no);
    run_cycles = d;
    if (timed) begin
      checks++;
      if (d > ni * no + nb * ntl * no + 3 * TILE + 80) begin
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

  initial begin
    finished = 0; checks = 0; failures = 0; run_cycles = 0;
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
    run(NI, NO, NB, 100, 1.0, 1);
    finished = 1;
  end
endmodule
