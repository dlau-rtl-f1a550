// dlau_pkg: types and constants shared by the DLAU accelerator.
//
// All data in DLAU (weights, node values, Part Sums, activations) are
// IEEE-754 single-precision words. The paper states that floating-point
// adders and multipliers are used; the 32-bit format is this design's choice.
// The register map of the AXI-Lite control slave is also defined here; it is
// this design's own, as the paper only names the control bus.
package dlau_pkg;

  typedef logic [31:0] fp32_t;

  localparam fp32_t FP_ZERO = 32'h0000_0000;
  localparam fp32_t FP_ONE  = 32'h3F80_0000;
  localparam fp32_t FP_QNAN = 32'h7FC0_0000;


  // AXI-Lite register word addresses (byte address = 4 * index).
  typedef enum logic [3:0] {
    REG_CTRL     = 4'd0,  // write 1 to bit 0: start; read: bit0 busy, bit1 done
    REG_NI       = 4'd1,  // number of input neurons
    REG_NO       = 4'd2,  // number of output neurons
    REG_BATCH    = 4'd3,  // batch size
    REG_SRC      = 4'd4,  // word address of the input stream in memory
    REG_DST      = 4'd5,  // word address of the results in memory
    REG_TBL_ADDR = 4'd6,  // AFAU table write: bit 8 selects b (1) or a (0), bits 7:0 index
    REG_TBL_DATA = 4'd7,  // AFAU table write data; the write commits the entry
    REG_CYCLES   = 4'd8   // read only: cycles of the last run
  } reg_idx_e;

endpackage
