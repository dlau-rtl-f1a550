// tb_afau: loads the sigmoid tables (chords of the sigmoid over segments of
// width k = 0.5 on 0..8) and drives the AFAU with random inputs in -12..12
// and with the boundary values 0, -0, +-8, +-k and large magnitudes. Every
// output is compared with the exactly rounded evaluation of Eq. (1) from
// the same tables, and with the true sigmoid (error below 0.01). It also
// checks one result per cycle at full rate and counts each of the four
// regions of Eq. (1).
module tb_afau;
  import tb_fp_pkg::*;
  localparam int NSEG = 16, KSHIFT = 1;
  localparam real K = 0.5;

  logic clk = 0, rst_n = 0;
  logic tbl_we, tbl_sel;
  logic [$clog2(NSEG)-1:0] tbl_addr;
  logic [31:0] tbl_data;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0, cyc = 0, in_pct = 0, out_pct = 0;
  logic [31:0] a_t[NSEG], b_t[NSEG];
  logic [31:0] stream[$], expq[$];
  real xq[$];
  int region_cnt[4];

  afau #(.NSEG(NSEG), .KSHIFT(KSHIFT)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real sigm(input real x);
    return 1.0 / (1.0 + $exp(-x));
  endfunction

  function automatic logic [31:0] model(input logic [31:0] xb);
    real x, ax;
    int i;
    logic [31:0] t;
    x  = fp_to_real(xb);
    ax = fabs(x);
    if (x <= -8.0) begin region_cnt[0]++; return 32'h0000_0000; end
    if (x > 8.0)   begin region_cnt[3]++; return 32'h3F80_0000; end
    i = int'($floor(ax / K));
    if (i > NSEG - 1) i = NSEG - 1;
    t = rne(fp_to_real(rne(fp_to_real(a_t[i]) * ax)) + fp_to_real(b_t[i]));
    if (x <= 0.0) begin region_cnt[1]++; return rne(1.0 - fp_to_real(t)); end
    region_cnt[2]++;
    return t;
  endfunction

  always @(negedge clk) begin
    in_valid  <= (stream.size() != 0) && ($urandom_range(99) < in_pct);
    in_data   <= (stream.size() != 0) ? stream[0] : 32'd0;
    out_ready <= ($urandom_range(99) < out_pct);
  end
  always @(posedge clk) begin
    if (in_valid && in_ready) void'(stream.pop_front());
    if (rst_n && out_valid && out_ready) begin
      logic [31:0] e;
      real x;
      e = expq.pop_front();
      x = xq.pop_front();
      checks += 2;
      if (out_data !== e) begin
        failures++;
        if (failures < 10) $display("FAIL f(%g) = %h expected %h", x, out_data, e);
      end
      if (fabs(fp_to_real(out_data) - sigm(x)) > 0.01) begin
        failures++;
        if (failures < 10) $display("FAIL f(%g) = %g, sigmoid %g", x, fp_to_real(out_data), sigm(x));
      end
    end
  end

  task automatic push(input logic [31:0] x);
    stream.push_back(x);
    expq.push_back(model(x));
    xq.push_back(fp_to_real(x));
  endtask

  initial begin
    int t0, n;
    tbl_we = 0; tbl_sel = 0; tbl_addr = 0; tbl_data = 0;
    // chord of the sigmoid over [i*K, (i+1)*K]
    for (int i = 0; i < NSEG; i++) begin
      real x0, x1, sl;
      x0 = i * K; x1 = x0 + K;
      sl = (sigm(x1) - sigm(x0)) / K;
      a_t[i] = rne(sl);
      b_t[i] = rne(sigm(x0) - sl * x0);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2 * NSEG; i++) begin
      @(negedge clk);
      tbl_we = 1; tbl_sel = (i >= NSEG); tbl_addr = ($clog2(NSEG))'(i % NSEG);
      tbl_data = (i >= NSEG) ? b_t[i - NSEG] : a_t[i];
    end
    @(negedge clk); tbl_we = 0;
    // boundary values
    push(32'h0000_0000); push(32'h8000_0000);
    push(32'h4100_0000); push(32'hC100_0000);   // +8, -8
    push(32'h4100_0001); push(32'hC0FF_FFFF);   // just above 8, just above -8
    push(32'h3F00_0000); push(32'hBF00_0000);   // +-k
    push(32'h4B00_0000); push(32'hCB00_0000);   // +-2^23
    for (int i = 0; i < 2000; i++) begin
      n = $urandom_range(24000);
      push(rne((n - 12000) / 1000.0 + 1.0e-6 * $urandom_range(999)));
    end
    in_pct = 70; out_pct = 70;
    wait (expq.size() == 0);
    // full rate
    in_pct = 100; out_pct = 100;
    @(negedge clk);
    for (int i = 0; i < 200; i++) begin
      n = $urandom_range(2000);
      push(rne((n - 1000) / 100.0));
    end
    t0 = cyc;
    wait (expq.size() == 0);
    checks++;
    if (cyc - t0 > 200 + 5) begin
      failures++;
      $display("FAIL 200 values took %0d cycles", cyc - t0);
    end
    for (int r = 0; r < 4; r++) begin
      checks++;
      if (region_cnt[r] == 0) begin failures++; $display("FAIL region %0d unused", r); end
    end
    repeat (3) @(negedge clk);
    $display("regions: %0d %0d %0d %0d", region_cnt[0], region_cnt[1], region_cnt[2], region_cnt[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
