// dlau_dma: DMA engine between memory and the DLAU processing units.
//
// The paper's DMA reads the weights and the tiled node data from memory for
// the TMMU and writes the results of the AFAU back. It gives no insides, so
// this is the simplest engine that does that, with one read and one write
// channel on a word-addressed memory port (standing in for the AXI memory
// interconnect and the DDR3 controller, which are outside DLAU).
//  * Read: after start, rd_len words from rd_base upwards are requested in
//    order. Responses come back in order, rd_rsp_valid one or more cycles
//    after the request, and cannot be refused; they land in an internal
//    buffer of RBUF words. A request is made only while the buffer has room
//    for every outstanding response, so nothing is lost.
//  * Write: the result stream is written to wr_len words from wr_base
//    upwards, one word per accepted wr_req.
// done pulses once all wr_len words have been accepted by the memory.
module dlau_dma
  import dlau_pkg::*;
#(
  parameter int unsigned AW   = 32,   // word address width
  parameter int unsigned LW   = 32,   // length counter width
  parameter int unsigned RBUF = 16    // read buffer words (= outstanding reads)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] rd_base,
  input  logic [LW-1:0] rd_len,
  input  logic [AW-1:0] wr_base,
  input  logic [LW-1:0] wr_len,
  output logic          busy,
  output logic          done,
  // memory read channel
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output logic [AW-1:0] rd_req_addr,
  input  logic          rd_rsp_valid,
  input  fp32_t         rd_rsp_data,
  // memory write channel
  output logic          wr_req_valid,
  input  logic          wr_req_ready,
  output logic [AW-1:0] wr_req_addr,
  output fp32_t         wr_req_data,
  // stream towards the TMMU
  output logic          out_valid,
  input  logic          out_ready,
  output fp32_t         out_data,
  // result stream from the AFAU
  input  logic          in_valid,
  output logic          in_ready,
  input  fp32_t         in_data
);

  localparam int unsigned CNTW = $clog2(RBUF + 1);

  logic [LW-1:0]   rd_left, wr_left;
  logic [AW-1:0]   rd_addr, wr_addr;
  logic [CNTW-1:0] outst, fcount;
  logic            rd_run, wr_run;
  logic            req_fire, buf_in_ready;

  dlau_fifo #(.WIDTH(32), .DEPTH(RBUF)) u_rbuf (
    .clk, .rst_n,
    .in_valid (rd_rsp_valid), .in_ready (buf_in_ready), .in_data (rd_rsp_data),
    .out_valid, .out_ready, .out_data,
    .count    (fcount)
  );

  assign rd_req_valid = rd_run && (rd_left != '0) &&
                        ((32'(outst) + 32'(fcount)) < RBUF);
  assign rd_req_addr  = rd_addr;
  assign req_fire     = rd_req_valid && rd_req_ready;

  assign wr_req_valid = wr_run && (wr_left != '0) && in_valid;
  assign wr_req_addr  = wr_addr;
  assign wr_req_data  = in_data;
  assign in_ready     = wr_run && (wr_left != '0) && wr_req_ready;

  assign busy = rd_run || wr_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_left <= '0; wr_left <= '0; rd_addr <= '0; wr_addr <= '0;
      outst <= '0; rd_run <= 1'b0; wr_run <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        rd_addr <= rd_base;  rd_left <= rd_len;  rd_run <= (rd_len != '0);
        wr_addr <= wr_base;  wr_left <= wr_len;  wr_run <= (wr_len != '0);
        done    <= (wr_len == '0);
      end else begin
        if (req_fire) begin
          rd_addr <= rd_addr + 1'b1;
          rd_left <= rd_left - 1'b1;
        end
        if (rd_run && rd_left == '0 && outst == '0) rd_run <= 1'b0;
        if (wr_req_valid && wr_req_ready) begin
          wr_addr <= wr_addr + 1'b1;
          wr_left <= wr_left - 1'b1;
          if (wr_left == LW'(1)) begin
            wr_run <= 1'b0;
            done   <= 1'b1;
          end
        end
      end
      case ({req_fire, rd_rsp_valid})
        2'b10:   outst <= outst + 1'b1;
        2'b01:   outst <= outst - 1'b1;
        default: outst <= outst;
      endcase
    end
  end

  // The credit rule guarantees a free buffer word for every response.
  a_rsp_room: assert property (@(posedge clk) disable iff (!rst_n)
                               rd_rsp_valid |-> buf_in_ready);
  a_rd_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                rd_req_valid && !rd_req_ready |=> rd_req_valid && $stable(rd_req_addr));

endmodule
