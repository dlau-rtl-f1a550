// tb_dlau_tiles: the tile-size sweep of the 128x128 layer. Builds DLAU with
// tiles of 8, 16 and 32 lanes, runs the same layer shape (batch 4) on each,
// checks every result, and checks that each run takes the weight load plus
// one cycle per Part Sum, so that the compute part of the run shrinks in
// proportion to the tile size.
module tb_dlau_tiles;
  localparam int NI = 128, NO = 128, NB = 4;
  logic fin8, fin16, fin32;
  int c8, c16, c32, f8, f16, f32, cy8, cy16, cy32;
  int checks = 0, failures = 0;

  tb_dlau_tile_run #(.TILE(8),  .NI(NI), .NO(NO), .NB(NB)) r8  (.finished(fin8),  .checks(c8),  .failures(f8),  .run_cycles(cy8));
  tb_dlau_tile_run #(.TILE(16), .NI(NI), .NO(NO), .NB(NB)) r16 (.finished(fin16), .checks(c16), .failures(f16), .run_cycles(cy16));
  tb_dlau_tile_run #(.TILE(32), .NI(NI), .NO(NO), .NB(NB)) r32 (.finished(fin32), .checks(c32), .failures(f32), .run_cycles(cy32));

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (fin8 && fin16 && fin32);
    #100;
    checks   = c8 + c16 + c32;
    failures = f8 + f16 + f32;
    $display("compute cycles beyond the weight load: tile 8: %0d, tile 16: %0d, tile 32: %0d",
             cy8 - NI * NO, cy16 - NI * NO, cy32 - NI * NO);
    checks++;
    if (!(cy8 > cy16 && cy16 > cy32)) begin
      failures++;
      $display("FAIL run time does not fall with the tile size");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
