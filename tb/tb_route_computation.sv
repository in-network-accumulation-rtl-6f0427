// tb_route_computation: exhaustive check of XY routing on a 16 x 16 coordinate
// space. The expected port is derived independently (x first, then y).
module tb_route_computation;
  import ina_pkg::*;
  logic [COORD_W-1:0] cx, cy, dx, dy;
  port_e op;
  int checks = 0, failures = 0;

  route_computation dut (.cur_x(cx), .cur_y(cy), .dst_x(dx), .dst_y(dy), .out_port(op));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 16; a++)
      for (int b = 0; b < 16; b++)
        for (int c = 0; c < 16; c++)
          for (int d = 0; d < 16; d += 3) begin
            port_e exp;
            cx = 4'(a); cy = 4'(b); dx = 4'(c); dy = 4'(d);
            #1;
            if (c != a) exp = (c > a) ? PORT_E : PORT_W;
            else if (d != b) exp = (d > b) ? PORT_S : PORT_N;
            else exp = PORT_L;
            checks++;
            if (op !== exp) begin
              failures++;
              if (failures < 5) $display("route (%0d,%0d)->(%0d,%0d): got %0d exp %0d", a, b, c, d, op, exp);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
