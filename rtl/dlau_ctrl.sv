// dlau_ctrl: AXI4-Lite control slave of DLAU.
//
// The paper attaches TMMU, PSAU and AFAU to a control bus (AXI-Lite) through
// which the processor configures and starts the accelerator; it gives no
// register map, so the one in dlau_pkg is this design's own:
//   0x00 CTRL     write bit0=1: start (ignored while busy)
//                 read: bit0 busy, bit1 done (set at the end of a run,
//                 cleared by the next start)
//   0x04 NI, 0x08 NO, 0x0C BATCH   network layer sizes and batch size
//   0x10 SRC, 0x14 DST             word addresses of input stream and results
//   0x18 TBL_ADDR  AFAU table index (bits 7:0) and table select (bit 8: b)
//   0x1C TBL_DATA  writing it stores the word in the AFAU table and advances
//                  the index by one
//   0x20 CYCLES    read only: clock cycles from start to done of the last run
// Write: the address and data channels are taken together when both are
// valid and no response is pending; the response is OKAY. Read: one cycle
// after the address is taken the data is returned. Unknown addresses read 0.
module dlau_ctrl
  import dlau_pkg::*;
#(
  parameter int unsigned ADDR_W = 8,
  parameter int unsigned CW     = 16,
  parameter int unsigned MAW    = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic              s_awvalid,
  output logic              s_awready,
  input  logic [ADDR_W-1:0] s_awaddr,
  input  logic              s_wvalid,
  output logic              s_wready,
  input  logic [31:0]       s_wdata,
  input  logic [3:0]        s_wstrb,
  output logic              s_bvalid,
  input  logic              s_bready,
  output logic [1:0]        s_bresp,
  input  logic              s_arvalid,
  output logic              s_arready,
  input  logic [ADDR_W-1:0] s_araddr,
  output logic              s_rvalid,
  input  logic              s_rready,
  output logic [31:0]       s_rdata,
  output logic [1:0]        s_rresp,
  // to the accelerator
  output logic              start,
  output logic [CW-1:0]     cfg_ni,
  output logic [CW-1:0]     cfg_no,
  output logic [CW-1:0]     cfg_batch,
  output logic [MAW-1:0]    cfg_src,
  output logic [MAW-1:0]    cfg_dst,
  output logic              tbl_we,
  output logic              tbl_sel,
  output logic [7:0]        tbl_addr,
  output fp32_t             tbl_data,
  input  logic              busy,
  input  logic              run_done
);

  logic        done_flag;
  logic [31:0] cycles, cyc_cnt;
  logic        wfire, rfire;
  reg_idx_e    widx, ridx;

  assign wfire     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wfire;
  assign s_wready  = wfire;
  assign s_bresp   = 2'b00;
  assign rfire     = s_arvalid && !s_rvalid;
  assign s_arready = rfire;
  assign s_rresp   = 2'b00;
  assign widx      = reg_idx_e'(s_awaddr[5:2]);
  assign ridx      = reg_idx_e'(s_araddr[5:2]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      start <= 1'b0; cfg_ni <= '0; cfg_no <= '0; cfg_batch <= '0;
      cfg_src <= '0; cfg_dst <= '0;
      tbl_we <= 1'b0; tbl_sel <= 1'b0; tbl_addr <= '0; tbl_data <= '0;
      done_flag <= 1'b0; cycles <= '0; cyc_cnt <= '0;
    end else begin
      start  <= 1'b0;
      if (tbl_we) tbl_addr <= tbl_addr + 1'b1;
      tbl_we <= 1'b0;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;

      if (wfire) begin
        s_bvalid <= 1'b1;
        if (s_wstrb != 4'h0) begin
          unique case (widx)
            REG_CTRL:     if (s_wdata[0] && !busy && !start) begin
                            start     <= 1'b1;
                            done_flag <= 1'b0;
                            cyc_cnt   <= '0;
                          end
            REG_NI:       cfg_ni    <= s_wdata[CW-1:0];
            REG_NO:       cfg_no    <= s_wdata[CW-1:0];
            REG_BATCH:    cfg_batch <= s_wdata[CW-1:0];
            REG_SRC:      cfg_src   <= s_wdata[MAW-1:0];
            REG_DST:      cfg_dst   <= s_wdata[MAW-1:0];
            REG_TBL_ADDR: begin
                            tbl_addr <= s_wdata[7:0];
                            tbl_sel  <= s_wdata[8];
                          end
            REG_TBL_DATA: begin
                            tbl_data <= s_wdata;
                            tbl_we   <= 1'b1;
                          end
            default: ;
          endcase
        end
      end

      if (busy) cyc_cnt <= cyc_cnt + 1'b1;
      if (run_done) begin
        done_flag <= 1'b1;
        cycles    <= cyc_cnt + 1'b1;
      end

      if (rfire) begin
        s_rvalid <= 1'b1;
        unique case (ridx)
          REG_CTRL:     s_rdata <= {30'd0, done_flag, busy};
          REG_NI:       s_rdata <= 32'(cfg_ni);
          REG_NO:       s_rdata <= 32'(cfg_no);
          REG_BATCH:    s_rdata <= 32'(cfg_batch);
          REG_SRC:      s_rdata <= 32'(cfg_src);
          REG_DST:      s_rdata <= 32'(cfg_dst);
          REG_TBL_ADDR: s_rdata <= {23'd0, tbl_sel, tbl_addr};
          REG_TBL_DATA: s_rdata <= tbl_data;
          REG_CYCLES:   s_rdata <= cycles;
          default:      s_rdata <= '0;
        endcase
      end
    end
  end

  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
                             s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
