// tb_dlau_ctrl: AXI4-Lite writes and reads on the control slave. Checks the
// configuration outputs, the one-cycle start pulse (and that start is
// ignored while busy), the AFAU table writes with automatic index
// increment, the busy/done status, the cycle counter and read-back of every
// register, with random delays on the response ready signals.
module tb_dlau_ctrl;
  logic clk = 0, rst_n = 0;
  logic s_awvalid, s_awready, s_wvalid, s_wready, s_bvalid, s_bready;
  logic s_arvalid, s_arready, s_rvalid, s_rready;
  logic [7:0]  s_awaddr, s_araddr;
  logic [31:0] s_wdata, s_rdata;
  logic [3:0]  s_wstrb;
  logic [1:0]  s_bresp, s_rresp;
  logic start, tbl_we, tbl_sel, busy, run_done;
  logic [15:0] cfg_ni, cfg_no, cfg_batch;
  logic [31:0] cfg_src, cfg_dst, tbl_data;
  logic [7:0]  tbl_addr;
  int checks = 0, failures = 0, n_start = 0;
  logic [31:0] tw_data[$];
  logic [8:0]  tw_addr[$];

  dlau_ctrl #(.ADDR_W(8), .CW(16), .MAW(32)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (start) n_start++;
    if (tbl_we) begin tw_data.push_back(tbl_data); tw_addr.push_back({tbl_sel, tbl_addr}); end
  end

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp_v);
    checks++;
    if (got !== exp_v) begin
      failures++;
      $display("FAIL %s: %h expected %h", what, got, exp_v);
    end
  endtask

  task automatic axi_write(input logic [7:0] addr, input logic [31:0] data);
    @(negedge clk);
    s_awvalid = 1; s_awaddr = addr; s_wvalid = 1; s_wdata = data; s_wstrb = 4'hF;
    @(posedge clk);
    while (!(s_awready && s_wready)) @(posedge clk);
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat ($urandom_range(2)) @(negedge clk);
    s_bready = 1;
    @(posedge clk);
    while (!s_bvalid) @(posedge clk);
    check("bresp", 32'(s_bresp), 0);
    @(negedge clk); s_bready = 0;
  endtask

  task automatic axi_read(input logic [7:0] addr, output logic [31:0] data);
    @(negedge clk);
    s_arvalid = 1; s_araddr = addr;
    @(posedge clk);
    while (!s_arready) @(posedge clk);
    @(negedge clk);
    s_arvalid = 0;
    repeat ($urandom_range(2)) @(negedge clk);
    s_rready = 1;
    @(posedge clk);
    while (!s_rvalid) @(posedge clk);
    data = s_rdata;
    @(negedge clk); s_rready = 0;
  endtask

  initial begin
    logic [31:0] d;
    s_awvalid = 0; s_wvalid = 0; s_bready = 0; s_arvalid = 0; s_rready = 0;
    s_awaddr = 0; s_araddr = 0; s_wdata = 0; s_wstrb = 0;
    busy = 0; run_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    axi_write(8'h04, 256); axi_write(8'h08, 128); axi_write(8'h0C, 5);
    axi_write(8'h10, 32'h1000); axi_write(8'h14, 32'h8000);
    check("ni", 32'(cfg_ni), 256); check("no", 32'(cfg_no), 128);
    check("batch", 32'(cfg_batch), 5);
    check("src", cfg_src, 32'h1000); check("dst", cfg_dst, 32'h8000);
    axi_read(8'h04, d); check("read ni", d, 256);
    axi_read(8'h08, d); check("read no", d, 128);
    axi_read(8'h0C, d); check("read batch", d, 5);
    axi_read(8'h10, d); check("read src", d, 32'h1000);
    axi_read(8'h14, d); check("read dst", d, 32'h8000);
    axi_read(8'h3C, d); check("read unmapped", d, 0);
    // table: three a entries from 2, two b entries from 0
    axi_write(8'h18, 32'h002); axi_write(8'h1C, 32'hA0); axi_write(8'h1C, 32'hA1);
    axi_write(8'h1C, 32'hA2);
    axi_write(8'h18, 32'h100); axi_write(8'h1C, 32'hB0); axi_write(8'h1C, 32'hB1);
    check("table writes", tw_data.size(), 5);
    if (tw_data.size() == 5) begin
      check("tbl0", 32'({tw_addr[0], tw_data[0][7:0]}), 32'({9'h002, 8'hA0}));
      check("tbl1", 32'({tw_addr[1], tw_data[1][7:0]}), 32'({9'h003, 8'hA1}));
      check("tbl2", 32'({tw_addr[2], tw_data[2][7:0]}), 32'({9'h004, 8'hA2}));
      check("tbl3", 32'({tw_addr[3], tw_data[3][7:0]}), 32'({9'h100, 8'hB0}));
      check("tbl4", 32'({tw_addr[4], tw_data[4][7:0]}), 32'({9'h101, 8'hB1}));
    end
    // start, run for 37 cycles, done
    axi_write(8'h00, 1);
    check("start pulses", n_start, 1);
    @(negedge clk); busy = 1;
    axi_write(8'h00, 1);                 // ignored while busy
    check("start while busy", n_start, 1);
    axi_read(8'h00, d); check("status busy", d, 32'h1);
    while (dut.cyc_cnt < 36) @(negedge clk);
    run_done = 1; @(negedge clk); run_done = 0; busy = 0;
    axi_read(8'h00, d); check("status done", d, 32'h2);
    axi_read(8'h20, d); check("cycles", d, 37);
    axi_write(8'h00, 1);
    check("second start", n_start, 2);
    axi_read(8'h00, d); check("done cleared", d, 32'h0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
