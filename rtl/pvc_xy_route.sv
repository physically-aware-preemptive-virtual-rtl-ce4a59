// pvc_xy_route: deterministic XY route computation (the router's RC stage).
//
// A flit first travels along X until its column matches, then along Y, then
// leaves through the local (Eject) port. XY routing is deadlock-free at the
// routing level; the protocol-level deadlock between AXI4 read and write
// data is handled by the VCs, not here. The paper names deterministic XY
// routing; the coordinate convention (x grows towards East, y grows towards
// North) is this design's choice.
//
// Interface: own coordinate and flit destination in, one-hot output port
// out (bit order of pvc_pkg::route_dir_e). Purely combinational.
module pvc_xy_route
  import pvc_pkg::*;
(
  input  coord_t               id_i,
  input  coord_t               dst_i,
  output logic [NumDirs-1:0]   route_o
);
  always_comb begin
    route_o = '0;
    if (dst_i.x > id_i.x)      route_o[East]  = 1'b1;
    else if (dst_i.x < id_i.x) route_o[West]  = 1'b1;
    else if (dst_i.y > id_i.y) route_o[North] = 1'b1;
    else if (dst_i.y < id_i.y) route_o[South] = 1'b1;
    else                       route_o[Eject] = 1'b1;
  end
endmodule
