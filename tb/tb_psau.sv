// tb_psau: feeds the PSAU with Part Sums for several layer shapes and checks
// each accumulated output against the exactly rounded sequence of additions
// (first tile + second tile, then + third tile, ...). Covers a single tile
// (pass-through), several tiles, one output neuron (the write-back bypass),
// random input gaps and output back-pressure, and checks that at full rate
// one Part Sum is accepted every cycle.
module tb_psau;
  import tb_fp_pkg::*;
  localparam int TILE = 4, DEPTH = 16, CW = 16;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [CW-1:0] cfg_ni, cfg_no, cfg_batch;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0, cyc = 0, in_pct = 0, out_pct = 0;
  int n_acc;
  logic [31:0] stream[$], expq[$];

  psau #(.TILE(TILE), .DEPTH(DEPTH), .CW(CW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    in_valid  <= (stream.size() != 0) && ($urandom_range(99) < in_pct);
    in_data   <= (stream.size() != 0) ? stream[0] : 32'd0;
    out_ready <= ($urandom_range(99) < out_pct);
  end
  always @(posedge clk) begin
    if (in_valid && in_ready) begin void'(stream.pop_front()); n_acc++; end
    if (rst_n && out_valid && out_ready) begin
      logic [31:0] e;
      e = expq.pop_front();
      checks++;
      if (out_data !== e) begin
        failures++;
        if (failures < 10) $display("FAIL sum %h expected %h at %0d ni=%0d no=%0d", out_data, e, cyc, cfg_ni, cfg_no);
      end
    end
  end

  task automatic run(input int ni, input int no, input int nb, input int ipct, input int opct);
    int ntl, t0, t1;
    logic [31:0] p;
    logic [31:0] acc[];
    ntl = (ni + TILE - 1) / TILE;
    acc = new[no];
    for (int n = 0; n < nb; n++)
      for (int k = 0; k < ntl; k++)
        for (int j = 0; j < no; j++) begin
          p = rand_fp(6);
          stream.push_back(p);
          acc[j] = (k == 0) ? p : rne(fp_to_real(acc[j]) + fp_to_real(p));
          if (k == ntl - 1) expq.push_back(acc[j]);
        end
    in_pct = ipct; out_pct = opct; n_acc = 0;
    @(negedge clk);
    cfg_ni = CW'(ni); cfg_no = CW'(no); cfg_batch = CW'(nb); start = 1;
    @(negedge clk); start = 0;
    t0 = cyc;
    wait (done);
    t1 = cyc;
    repeat (5) @(negedge clk);
    checks++;
    if (expq.size() != 0 || stream.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing, %0d inputs left", expq.size(), stream.size());
    end
    if (ipct == 100 && opct == 100) begin
      checks++;
      if (t1 - t0 > nb * ntl * no + 2) begin
        failures++;
        $display("FAIL %0d Part Sums took %0d cycles", nb * ntl * no, t1 - t0);
      end
    end
  endtask

  initial begin
    start = 0; cfg_ni = 0; cfg_no = 0; cfg_batch = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(4, 6, 2, 100, 100);    // one tile: outputs equal the inputs
    run(11, 7, 3, 70, 60);     // three tiles, gaps and back-pressure
    run(16, 1, 3, 100, 100);   // one neuron: back-to-back read after write
    run(9, 2, 2, 90, 90);      // two neurons
    run(32, 16, 2, 100, 100);  // eight tiles at full rate, all memory words
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
