// pvc_pkg: types and constants shared by the preemptive virtual-channel NoC.
//
// The network is a 2D mesh with deterministic XY routing. Every router has
// five ports (four mesh directions plus the local port towards the tile's
// network interface). The wide data plane carries two traffic classes, AXI4
// wide write data and wide read data, each statically bound to its own
// virtual channel (VC); the narrow request and response planes use one VC.
//
// A flit is {payload, header}. The header layout below is this design's own
// choice: the coordinates and the end-of-burst flag are what XY routing and
// wormhole switching need; the real network interface would add AXI IDs and
// similar fields to the payload.
package pvc_pkg;

  // Router ports, in the order used for every port array.
  typedef enum logic [2:0] {
    North = 3'd0,
    East  = 3'd1,
    South = 3'd2,
    West  = 3'd3,
    Eject = 3'd4
  } route_dir_e;

  localparam int unsigned NumDirs = 5;

  // Width of one mesh coordinate (supports meshes up to 16 x 16).
  localparam int unsigned CoordW = 4;

  // Traffic-class to VC binding on the wide plane.
  localparam int unsigned VcWideW = 0;   // AXI4 wide W beats
  localparam int unsigned VcWideR = 1;   // AXI4 wide R beats
  localparam int unsigned NumWideVcs = 2;

  // Link widths. 512 bits is the wide payload the paper evaluates; 64 bits
  // is its "typical" narrow width.
  localparam int unsigned WideDataW   = 512;
  localparam int unsigned NarrowDataW = 64;

  typedef struct packed {
    logic [CoordW-1:0] x;
    logic [CoordW-1:0] y;
  } coord_t;

  typedef struct packed {
    coord_t src;    // sender tile
    coord_t dst;    // destination tile
    logic   last;   // last flit of a burst: releases the wormhole lock
  } hdr_t;

  localparam int unsigned HdrW = $bits(hdr_t);

endpackage
