// tb_dlau_fifo: random pushes and pops against a queue model. Checks the
// order of the data, the full and empty flags (in_ready, out_valid), the
// occupancy count, and that a FIFO written and read every cycle passes one
// word per cycle.
module tb_dlau_fifo;
  localparam int DEPTH = 5;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [31:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  logic [31:0] model[$];
  int checks = 0, failures = 0, fulls = 0, n_out = 0;

  dlau_fifo #(.WIDTH(32), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic fail(input string s);
    failures++;
    if (failures < 10) $display("FAIL %s", s);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checks and model update at each clock edge
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (32'(count) != model.size()) fail($sformatf("count %0d model %0d", count, model.size()));
    if (in_ready != (model.size() < DEPTH)) fail("in_ready");
    if (out_valid != (model.size() > 0)) fail("out_valid");
    if (out_valid && out_data != model[0]) fail($sformatf("data %h exp %h", out_data, model[0]));
    if (!in_ready) fulls++;
    if (out_valid && out_ready) begin void'(model.pop_front()); n_out++; end
    if (in_valid && in_ready) model.push_back(in_data);
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic, biased towards filling then towards draining
    for (int ph = 0; ph < 4; ph++) begin
      for (int i = 0; i < 1000; i++) begin
        @(negedge clk);
        in_valid  = ($urandom_range(99) < ((ph % 2 != 0) ? 30 : 80));
        out_ready = ($urandom_range(99) < ((ph % 2 != 0) ? 80 : 30));
        in_data   = $urandom;
      end
    end
    // streaming: one word in and out per cycle after priming
    @(negedge clk); in_valid = 1; out_ready = 1;
    begin
      int n_before;
      n_before = n_out;
      repeat (100) begin @(negedge clk); in_data = $urandom; end
      checks++;
      if (n_out - n_before < 99) fail($sformatf("throughput %0d of 100", n_out - n_before));
    end
    @(negedge clk); in_valid = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (fulls == 0) fail("FIFO never filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
