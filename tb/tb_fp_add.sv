// tb_fp_add: checks fp_add against an exactly rounded reference on random
// operands of both signs (exponents close enough for an exact real sum), on
// near-cancellations, on operands far apart in magnitude and on the special
// values.
module tb_fp_add;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_add dut (.a, .b, .y);

  task automatic check(input logic [31:0] exp_y);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h, expected %h", a, b, y, exp_y);
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
      a = rand_fp(12);
      b = rand_fp(12);
      check(rne(fp_to_real(a) + fp_to_real(b)));
    end
    // near cancellation: b = -a with a few low bits changed
    for (int i = 0; i < 500; i++) begin
      a = rand_fp(10);
      b = {~a[31], a[30:4], 4'($urandom)};
      check(rne(fp_to_real(a) + fp_to_real(b)));
    end
    // far apart: the smaller operand only affects rounding
    for (int i = 0; i < 200; i++) begin
      a = {1'($urandom), 8'd150, 23'($urandom)};
      b = {1'($urandom), 8'd100, 23'($urandom)};
      checks++;
      #1;
      if (y !== a) begin
        failures++;
        $display("FAIL far %h + %h = %h", a, b, y);
      end
    end
    a = 32'h3F80_0000; b = 32'h3F80_0000; check(32'h4000_0000);   // 1 + 1
    a = 32'h3F80_0000; b = 32'hBF80_0000; check(32'h0000_0000);   // 1 - 1
    a = 32'h0000_0000; b = 32'hC0A0_0000; check(32'hC0A0_0000);   // 0 + -5
    a = 32'h4120_0000; b = 32'h0000_0000; check(32'h4120_0000);   // 10 + 0
    a = 32'h7F80_0000; b = 32'hFF80_0000; check(32'h7FC0_0000);   // inf - inf
    a = 32'h7F80_0000; b = 32'h3F80_0000; check(32'h7F80_0000);   // inf + 1
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; check(32'h7F80_0000);   // overflow
    a = 32'h3FC0_0000; b = 32'hBF00_0000; check(32'h3F80_0000);   // 1.5 - 0.5
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
