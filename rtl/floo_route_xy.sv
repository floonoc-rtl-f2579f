// Dimension-ordered (XY) route computation for a 2D mesh.
//
// A flit is first moved along x until its destination column is reached,
// then along y; at its own coordinates it is ejected to the local port.
// East is increasing x and north is increasing y. The output is one-hot over
// the five router ports (North, East, South, West, Eject), in the order of
// floo_pkg::route_dir_e. The local coordinates are static routing
// information supplied from outside the router, as in the paper; the
// direction convention and port order are this design's choice.
// Purely combinational.
module floo_route_xy
  import floo_pkg::*;
(
  input  id_t                xy_id_i,
  input  id_t                dst_i,
  output logic [NumDirs-1:0] port_o
);
  always_comb begin
    port_o = '0;
    if (dst_i.x > xy_id_i.x)      port_o[East]  = 1'b1;
    else if (dst_i.x < xy_id_i.x) port_o[West]  = 1'b1;
    else if (dst_i.y > xy_id_i.y) port_o[North] = 1'b1;
    else if (dst_i.y < xy_id_i.y) port_o[South] = 1'b1;
    else                          port_o[Eject] = 1'b1;
  end
endmodule
