// tb_pvc_xy_route: exhaustive test of XY route computation on a 4 x 4 mesh:
// every (own tile, destination) pair against the X-first rule.
module tb_pvc_xy_route;
  import pvc_pkg::*;
  coord_t id, dst;
  logic [NumDirs-1:0] route;
  int checks = 0, failures = 0;

  pvc_xy_route dut (.id_i(id), .dst_i(dst), .route_o(route));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int ix = 0; ix < 4; ix++)
      for (int iy = 0; iy < 4; iy++)
        for (int dx = 0; dx < 4; dx++)
          for (int dy = 0; dy < 4; dy++) begin
            logic [NumDirs-1:0] exp;
            id.x = CoordW'(ix); id.y = CoordW'(iy);
            dst.x = CoordW'(dx); dst.y = CoordW'(dy);
            exp = '0;
            if (dx != ix)      exp = (dx > ix) ? 5'b00010 : 5'b01000;   // East : West
            else if (dy != iy) exp = (dy > iy) ? 5'b00001 : 5'b00100;   // North : South
            else               exp = 5'b10000;                          // Eject
            #1;
            checks++;
            if (route !== exp) begin
              failures++;
              $display("FAIL id=(%0d,%0d) dst=(%0d,%0d) route=%b exp=%b", ix, iy, dx, dy, route, exp);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
