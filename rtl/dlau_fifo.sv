// dlau_fifo: synchronous FIFO used as the input and output buffer of each
// DLAU processing unit.
//
// The paper gives every processing unit an input and an output FIFO so that
// differing short-term throughput between the units loses no data. Both
// sides use a valid/ready handshake in the style of AXI-Stream: a word moves
// when valid and ready are both high on a rising clock edge. The storage is
// a DEPTH-entry array with read and write pointers and an occupancy counter;
// the head word is shown combinationally on out_data, so a word written in
// one cycle can be read in the next. Depth and width are this design's
// choice. count reports the occupancy.
module dlau_fifo #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [WIDTH-1:0]         in_data,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic [WIDTH-1:0]         out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      case ({push, pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A full FIFO must never be written, an empty one never read.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) 32'(count) <= DEPTH);
  a_out_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                                   out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
