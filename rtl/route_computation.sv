// route_computation: dimension-ordered (XY) routing for one head flit.
//
// The packet first travels along x until its column matches, then along y, then is
// ejected to the local port. Purely combinational; the router samples the result in
// its RC/VA stage. The paper names the route-computation unit but not the algorithm;
// XY routing is this design's choice (deadlock-free on a mesh without extra VCs).
module route_computation
  import ina_pkg::*;
(
  input  logic [COORD_W-1:0] cur_x,
  input  logic [COORD_W-1:0] cur_y,
  input  logic [COORD_W-1:0] dst_x,
  input  logic [COORD_W-1:0] dst_y,
  output port_e              out_port
);
  always_comb begin
    if (dst_x > cur_x)      out_port = PORT_E;
    else if (dst_x < cur_x) out_port = PORT_W;
    else if (dst_y > cur_y) out_port = PORT_S;
    else if (dst_y < cur_y) out_port = PORT_N;
    else                    out_port = PORT_L;
  end
endmodule
