// Self-checking testbench of xy_route: every combination of router and
// destination coordinates in the 4x4 mesh is compared with the XY rule
// written as signed coordinate differences.
module tb_xy_route;
  import noc_pkg::*;
  logic [COORD_W-1:0] my_row, my_col, dst_row, dst_col;
  port_e out_port;
  int checks = 0, failures = 0;

  xy_route dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++)
    for (int c = 0; c < 4; c++) for (int d = 0; d < 4; d++) begin
      int dx, dy;
      port_e exp;
      my_row = COORD_W'(a); my_col = COORD_W'(b); dst_row = COORD_W'(c); dst_col = COORD_W'(d);
      #1;
      dx = d - b;
      dy = c - a;
      exp = (dx > 0) ? PORT_E : (dx < 0) ? PORT_W : (dy > 0) ? PORT_S : (dy < 0) ? PORT_N : PORT_L;
      checks++;
      if (out_port !== exp) begin
        failures++;
        $display("FAIL at (%0d,%0d) to (%0d,%0d): got %0d expected %0d", a, b, c, d, out_port, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
