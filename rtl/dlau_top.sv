// dlau_top: the DLAU accelerator with its DMA and control slave.
//
// DLAU evaluates one fully connected layer y[n][j] = f(sum_i w[i][j]*x[n][i])
// for a batch of input vectors, for layers far larger than the datapath, by
// splitting the inputs into tiles of TILE neurons (Algorithm 1 of the paper).
// Three pipelined units work as a stream (Fig. 1 of the paper):
//   DMA -> TMMU (tile dot products, "Part Sums")
//       -> PSAU (accumulation of the Part Sums over the tiles)
//       -> AFAU (piecewise linear sigmoid) -> DMA -> memory.
// Each unit has an input and an output FIFO, as in the paper; between two
// units the output FIFO of one feeds the input FIFO of the next. The host
// (the embedded processor in the paper) programs the sizes, addresses and
// sigmoid tables through the AXI4-Lite port and sets CTRL.start; the DMA
// then reads the input stream from memory (ni*no weights, row-major, then
// batch*ni node values) starting at SRC, and writes the batch*no results,
// in order n then j, starting at DST. CTRL.done is set when the last
// result has been written; CYCLES holds the run time in clock cycles.
// The memory side (the paper's AXI interconnect and DDR3 controller, not
// part of DLAU) is brought out as a simple word-addressed request/response
// port, described in dlau_dma.
// Timing: after the weight load (ni*no cycles at one word per cycle) one
// Part Sum and, in the last tile round, one result is produced per cycle.
module dlau_top
  import dlau_pkg::*;
#(
  parameter int unsigned TILE       = 32,    // "Tile size=32"
  parameter int unsigned WDEPTH     = 2048,  // words per TMMU weight bank
  parameter int unsigned ACC_DEPTH  = 1024,  // PSAU accumulator words
  parameter int unsigned NSEG       = 16,    // AFAU segments per side
  parameter int unsigned KSHIFT     = 1,     // AFAU segment width k = 2^-KSHIFT
  parameter int unsigned FIFO_DEPTH = 16,
  parameter int unsigned CW         = 16,    // size register width
  parameter int unsigned MAW        = 32     // memory word address width
) (
  input  logic           clk,
  input  logic           rst_n,
  // AXI4-Lite control slave
  input  logic           s_awvalid,
  output logic           s_awready,
  input  logic [7:0]     s_awaddr,
  input  logic           s_wvalid,
  output logic           s_wready,
  input  logic [31:0]    s_wdata,
  input  logic [3:0]     s_wstrb,
  output logic           s_bvalid,
  input  logic           s_bready,
  output logic [1:0]     s_bresp,
  input  logic           s_arvalid,
  output logic           s_arready,
  input  logic [7:0]     s_araddr,
  output logic           s_rvalid,
  input  logic           s_rready,
  output logic [31:0]    s_rdata,
  output logic [1:0]     s_rresp,
  // memory port of the DMA
  output logic           mem_rd_valid,
  input  logic           mem_rd_ready,
  output logic [MAW-1:0] mem_rd_addr,
  input  logic           mem_rsp_valid,
  input  fp32_t          mem_rsp_data,
  output logic           mem_wr_valid,
  input  logic           mem_wr_ready,
  output logic [MAW-1:0] mem_wr_addr,
  output fp32_t          mem_wr_data,
  // status
  output logic           busy
);


  logic          start;
  logic [CW-1:0] cfg_ni, cfg_no, cfg_batch;
  logic [MAW-1:0] cfg_src, cfg_dst;
  logic          tbl_we, tbl_sel;
  logic [7:0]    tbl_addr;
  fp32_t         tbl_data;
  logic          dma_busy, dma_done, tmmu_busy, psau_busy;
  logic [31:0]   rd_len, wr_len;

  // stream links: valid, ready, data
  logic  dma_o_v, dma_o_r;   fp32_t dma_o_d;   // DMA -> TMMU input FIFO
  logic  ti_v, ti_r;         fp32_t ti_d;      // TMMU input FIFO -> TMMU
  logic  to_v, to_r;         fp32_t to_d;      // TMMU -> TMMU output FIFO
  logic  tq_v, tq_r;         fp32_t tq_d;      // TMMU output FIFO -> PSAU input FIFO
  logic  pi_v, pi_r;         fp32_t pi_d;      // PSAU input FIFO -> PSAU
  logic  po_v, po_r;         fp32_t po_d;      // PSAU -> PSAU output FIFO
  logic  pq_v, pq_r;         fp32_t pq_d;      // PSAU output FIFO -> AFAU input FIFO
  logic  ai_v, ai_r;         fp32_t ai_d;      // AFAU input FIFO -> AFAU
  logic  ao_v, ao_r;         fp32_t ao_d;      // AFAU -> AFAU output FIFO
  logic  aq_v, aq_r;         fp32_t aq_d;      // AFAU output FIFO -> DMA

  assign rd_len = 32'(cfg_ni) * 32'(cfg_no) + 32'(cfg_batch) * 32'(cfg_ni);
  assign wr_len = 32'(cfg_batch) * 32'(cfg_no);
  assign busy   = dma_busy || tmmu_busy || psau_busy;

  dlau_ctrl #(.ADDR_W(8), .CW(CW), .MAW(MAW)) u_ctrl (
    .clk, .rst_n,
    .s_awvalid, .s_awready, .s_awaddr, .s_wvalid, .s_wready, .s_wdata, .s_wstrb,
    .s_bvalid, .s_bready, .s_bresp, .s_arvalid, .s_arready, .s_araddr,
    .s_rvalid, .s_rready, .s_rdata, .s_rresp,
    .start, .cfg_ni, .cfg_no, .cfg_batch, .cfg_src, .cfg_dst,
    .tbl_we, .tbl_sel, .tbl_addr, .tbl_data,
    .busy, .run_done (dma_done)
  );

  dlau_dma #(.AW(MAW), .LW(32), .RBUF(FIFO_DEPTH)) u_dma (
    .clk, .rst_n, .start,
    .rd_base (cfg_src), .rd_len, .wr_base (cfg_dst), .wr_len,
    .busy (dma_busy), .done (dma_done),
    .rd_req_valid (mem_rd_valid), .rd_req_ready (mem_rd_ready), .rd_req_addr (mem_rd_addr),
    .rd_rsp_valid (mem_rsp_valid), .rd_rsp_data (mem_rsp_data),
    .wr_req_valid (mem_wr_valid), .wr_req_ready (mem_wr_ready),
    .wr_req_addr (mem_wr_addr), .wr_req_data (mem_wr_data),
    .out_valid (dma_o_v), .out_ready (dma_o_r), .out_data (dma_o_d),
    .in_valid (aq_v), .in_ready (aq_r), .in_data (aq_d)
  );

  // ------------------------------------------------------------------ TMMU
  dlau_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_tmmu_ibuf (
    .clk, .rst_n, .in_valid (dma_o_v), .in_ready (dma_o_r), .in_data (dma_o_d),
    .out_valid (ti_v), .out_ready (ti_r), .out_data (ti_d), .count ());

  tmmu #(.TILE(TILE), .WDEPTH(WDEPTH), .CW(CW)) u_tmmu (
    .clk, .rst_n, .start, .cfg_ni, .cfg_no, .cfg_batch,
    .busy (tmmu_busy), .done (),
    .in_valid (ti_v), .in_ready (ti_r), .in_data (ti_d),
    .out_valid (to_v), .out_ready (to_r), .out_data (to_d));

  dlau_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_tmmu_obuf (
    .clk, .rst_n, .in_valid (to_v), .in_ready (to_r), .in_data (to_d),
    .out_valid (tq_v), .out_ready (tq_r), .out_data (tq_d), .count ());

  // ------------------------------------------------------------------ PSAU
  dlau_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_psau_ibuf (
    .clk, .rst_n, .in_valid (tq_v), .in_ready (tq_r), .in_data (tq_d),
    .out_valid (pi_v), .out_ready (pi_r), .out_data (pi_d), .count ());

  psau #(.TILE(TILE), .DEPTH(ACC_DEPTH), .CW(CW)) u_psau (
    .clk, .rst_n, .start, .cfg_ni, .cfg_no, .cfg_batch,
    .busy (psau_busy), .done (),
    .in_valid (pi_v), .in_ready (pi_r), .in_data (pi_d),
    .out_valid (po_v), .out_ready (po_r), .out_data (po_d));

  dlau_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_psau_obuf (
    .clk, .rst_n, .in_valid (po_v), .in_ready (po_r), .in_data (po_d),
    .out_valid (pq_v), .out_ready (pq_r), .out_data (pq_d), .count ());

  // ------------------------------------------------------------------ AFAU
  dlau_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_afau_ibuf (
    .clk, .rst_n, .in_valid (pq_v), .in_ready (pq_r), .in_data (pq_d),
    .out_valid (ai_v), .out_ready (ai_r), .out_data (ai_d), .count ());

  afau #(.NSEG(NSEG), .KSHIFT(KSHIFT)) u_afau (
    .clk, .rst_n,
    .tbl_we, .tbl_sel, .tbl_addr (tbl_addr[$clog2(NSEG)-1:0]), .tbl_data,
    .in_valid (ai_v), .in_ready (ai_r), .in_data (ai_d),
    .out_valid (ao_v), .out_ready (ao_r), .out_data (ao_d));

  dlau_fifo #(.WIDTH(32), .DEPTH(FIFO_DEPTH)) u_afau_obuf (
    .clk, .rst_n, .in_valid (ao_v), .in_ready (ao_r), .in_data (ao_d),
    .out_valid (aq_v), .out_ready (aq_r), .out_data (aq_d), .count ());

endmodule
