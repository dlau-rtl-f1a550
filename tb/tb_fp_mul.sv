// tb_fp_mul: checks fp_mul against an exactly rounded reference on random
// operands, on operands whose product rounds up to the next power of two, and
// on zero, infinity, NaN, overflow and underflow.
module tb_fp_mul;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_mul dut (.a, .b, .y);

  task automatic check(input logic [31:0] exp_y);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h, expected %h", a, b, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      a = rand_fp(40);
      b = rand_fp(40);
      check(rne(fp_to_real(a) * fp_to_real(b)));
    end
    // products that carry into the next binade when rounded
    for (int i = 0; i < 200; i++) begin
      a = {1'b0, 8'd127, 23'h7FFFFF - 23'($urandom_range(3))};
      b = {1'b0, 8'd127, 23'($urandom_range(3))};
      check(rne(fp_to_real(a) * fp_to_real(b)));
    end
    a = 32'h3F80_0000; b = 32'h4049_0FDB; check(32'h4049_0FDB);   // 1 * pi
    a = 32'h0000_0000; b = 32'h4049_0FDB; check(32'h0000_0000);   // 0 * pi
    a = 32'h8000_0000; b = 32'h4049_0FDB; check(32'h8000_0000);   // -0 * pi
    a = 32'h7F80_0000; b = 32'hC000_0000; check(32'hFF80_0000);   // inf * -2
    a = 32'h7F80_0000; b = 32'h0000_0000; check(32'h7FC0_0000);   // inf * 0
    a = 32'h7FC0_0001; b = 32'h3F80_0000; check(32'h7FC0_0000);   // NaN
    a = 32'h7F00_0000; b = 32'h7F00_0000; check(32'h7F80_0000);   // overflow
    a = 32'h0080_0000; b = 32'h0080_0000; check(32'h0000_0000);   // underflow
    a = 32'hC040_0000; b = 32'h4080_0000; check(32'hC140_0000);   // -3 * 4 = -12
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
