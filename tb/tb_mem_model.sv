// tb_mem_model: behavioural word memory for the DMA port of DLAU, standing
// in for the AXI interconnect, DDR3 controller and DDR3 memory. A read
// request accepted in one cycle is answered LAT cycles later, in order.
// READY_PCT sets how often the read and write channels accept a request;
// responses cannot be refused. Not synthesizable.
module tb_mem_model #(
  parameter int WORDS     = 1 << 17,
  parameter int LAT       = 4,
  parameter int READY_PCT = 100
) (
  input  logic        clk,
  input  logic        rd_valid,
  output logic        rd_ready,
  input  logic [31:0] rd_addr,
  output logic        rsp_valid,
  output logic [31:0] rsp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [31:0] wr_data
);
  logic [31:0] mem [WORDS];
  longint      cyc = 0;
  longint      due[$];
  logic [31:0] dat[$];
  int          rd_stalls = 0, wr_stalls = 0;
  int          ready_pct = READY_PCT;   // may be changed at run time

  initial begin
    rd_ready = 0; wr_ready = 0; rsp_valid = 0; rsp_data = 0;
  end

  always @(negedge clk) begin
    rd_ready <= ($urandom_range(99) < ready_pct);
    wr_ready <= ($urandom_range(99) < ready_pct);
    if (due.size() != 0 && due[0] <= cyc) begin
      void'(due.pop_front());
      rsp_valid <= 1'b1;
      rsp_data  <= dat.pop_front();
    end else begin
      rsp_valid <= 1'b0;
    end
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rd_valid && rd_ready) begin
      due.push_back(cyc + longint'(LAT) - 1);
      dat.push_back(mem[rd_addr % WORDS]);
    end
    if (rd_valid && !rd_ready) rd_stalls++;
    if (wr_valid && wr_ready) mem[wr_addr % WORDS] <= wr_data;
    if (wr_valid && !wr_ready) wr_stalls++;
  end
endmodule
