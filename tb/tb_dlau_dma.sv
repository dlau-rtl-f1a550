// tb_dlau_dma: the DMA between a behavioural memory and stream sinks. Reads
// a block of words from memory into the output stream (with back-pressure
// from the stream and a memory that sometimes refuses requests), writes a
// result stream back to memory, and checks the data, the addresses, the done
// pulse, that the read buffer is never overrun (checked by the DMA's own
// assertion) and that an unstalled read moves one word per cycle.
module tb_dlau_dma;
  localparam int RBUF = 8;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  logic [31:0] rd_base, rd_len, wr_base, wr_len;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [31:0] rd_req_addr, rd_rsp_data;
  logic wr_req_valid, wr_req_ready;
  logic [31:0] wr_req_addr, wr_req_data;
  logic out_valid, out_ready, in_valid, in_ready;
  logic [31:0] out_data, in_data;
  int checks = 0, failures = 0, cyc = 0, out_pct = 100, in_pct = 100;
  int n_rd, n_done;
  logic [31:0] wq[$];

  logic sel_fast, rdy_f, rdy_s, rsp_v_f, rsp_v_s, wrdy_f, wrdy_s;
  logic [31:0] rsp_d_f, rsp_d_s;

  dlau_dma #(.AW(32), .LW(32), .RBUF(RBUF)) dut (.*);
  tb_mem_model #(.WORDS(4096), .LAT(5), .READY_PCT(100)) mem_fast (
    .clk, .rd_valid (rd_req_valid & sel_fast), .rd_ready (rdy_f), .rd_addr (rd_req_addr),
    .rsp_valid (rsp_v_f), .rsp_data (rsp_d_f),
    .wr_valid (wr_req_valid & sel_fast), .wr_ready (wrdy_f), .wr_addr (wr_req_addr), .wr_data (wr_req_data));
  tb_mem_model #(.WORDS(4096), .LAT(3), .READY_PCT(60)) mem_slow (
    .clk, .rd_valid (rd_req_valid & !sel_fast), .rd_ready (rdy_s), .rd_addr (rd_req_addr),
    .rsp_valid (rsp_v_s), .rsp_data (rsp_d_s),
    .wr_valid (wr_req_valid & !sel_fast), .wr_ready (wrdy_s), .wr_addr (wr_req_addr), .wr_data (wr_req_data));

  assign rd_req_ready = sel_fast ? rdy_f : rdy_s;
  assign rd_rsp_valid = sel_fast ? rsp_v_f : rsp_v_s;
  assign rd_rsp_data  = sel_fast ? rsp_d_f : rsp_d_s;
  assign wr_req_ready = sel_fast ? wrdy_f : wrdy_s;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    out_ready <= ($urandom_range(99) < out_pct);
    in_valid  <= (wq.size() != 0) && ($urandom_range(99) < in_pct);
    in_data   <= (wq.size() != 0) ? wq[0] : 32'd0;
  end
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) void'(wq.pop_front());
    if (done) n_done++;
    if (out_valid && out_ready) begin
      logic [31:0] e;
      e = sel_fast ? mem_fast.mem[rd_base + n_rd] : mem_slow.mem[rd_base + n_rd];
      checks++;
      if (out_data !== e) begin
        failures++;
        if (failures < 10) $display("FAIL read word %0d: %h expected %h", n_rd, out_data, e);
      end
      n_rd++;
    end
  end

  task automatic run(input bit fast, input int rb, input int rl, input int wb, input int wl,
                     input int opct, input int ipct);
    logic [31:0] wdat[$];
    int t0, t_first, t_last;
    sel_fast = fast;
    for (int i = 0; i < 4096; i++) begin
      mem_fast.mem[i] = 32'(i) * 32'h9E37_79B9;
      mem_slow.mem[i] = 32'(i) * 32'h7F4A_7C15;
    end
    for (int i = 0; i < wl; i++) wdat.push_back($urandom);
    wq = wdat;
    out_pct = opct; in_pct = ipct; n_rd = 0; n_done = 0;
    @(negedge clk);
    rd_base = rb; rd_len = rl; wr_base = wb; wr_len = wl; start = 1;
    @(negedge clk); start = 0;
    t0 = cyc;
    wait (n_rd == rl && n_done == 1 && !busy);
    repeat (3) @(negedge clk);
    checks++;
    if (n_done != 1) begin failures++; $display("FAIL done pulses %0d", n_done); end
    for (int i = 0; i < wl; i++) begin
      logic [31:0] g;
      g = fast ? mem_fast.mem[wb + i] : mem_slow.mem[wb + i];
      checks++;
      if (g !== wdat[i]) begin
        failures++;
        if (failures < 10) $display("FAIL write word %0d: %h expected %h", i, g, wdat[i]);
      end
    end
    if (fast && opct == 100) begin
      checks++;
      if (cyc - t0 > rl + 5 + 8) begin
        failures++;
        $display("FAIL %0d words took %0d cycles", rl, cyc - t0);
      end
    end
  endtask

  initial begin
    start = 0; rd_base = 0; rd_len = 0; wr_base = 0; wr_len = 0; sel_fast = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1, 100, 300, 2000, 50, 100, 100);   // full rate read
    run(0, 7, 257, 3000, 120, 40, 70);      // refused requests, back-pressure
    run(1, 0, 64, 1000, 0, 30, 100);        // read only, slow consumer
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
