// pvc_mesh: top level. A NumX x NumY mesh of tile networks (pvc_tile), each
// with a wide data plane that carries AXI4 write and read data on two
// preemptive VCs over one physical link, and narrow request and response
// planes. The paper's evaluation system is a 4 x 4 mesh.
//
// Tile (x, y) has index y*NumX + x; x grows towards East and y towards
// North, matching the XY routing in pvc_xy_route. Neighbouring tiles are
// joined port to port: East output of (x, y) to West input of (x+1, y),
// North output of (x, y) to South input of (x, y+1), and the reverse ways.
// Router ports on the mesh edge are tied off (no input flits, no ready).
// The local (Eject) port of every router is brought out of the top: that is
// where each tile's network interface and compute cluster would attach;
// those are not part of this RTL.
//
// Top-level ports, indexed by tile: per plane, the flit entering the
// network at that tile (ni_*_in) and the flit leaving it there (ni_*_out),
// each with per-VC valid and ready and a shared flit bus {payload, hdr_t}.
module pvc_mesh
  import pvc_pkg::*;
#(
  parameter int unsigned NumX    = 4,
  parameter int unsigned NumY    = 4,
  parameter int unsigned WideW   = WideDataW,
  parameter int unsigned NarrowW = NarrowDataW,
  localparam int unsigned NumTiles    = NumX * NumY,
  localparam int unsigned WideFlitW   = WideW + HdrW,
  localparam int unsigned NarrowFlitW = NarrowW + HdrW
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // Wide plane, local ports.
  input  logic [NumWideVcs-1:0]  ni_wide_in_valid_i  [NumTiles],
  output logic [NumWideVcs-1:0]  ni_wide_in_ready_o  [NumTiles],
  input  logic [WideFlitW-1:0]   ni_wide_in_data_i   [NumTiles],
  output logic [NumWideVcs-1:0]  ni_wide_out_valid_o [NumTiles],
  input  logic [NumWideVcs-1:0]  ni_wide_out_ready_i [NumTiles],
  output logic [WideFlitW-1:0]   ni_wide_out_data_o  [NumTiles],
  // Narrow request plane, local ports.
  input  logic [NumTiles-1:0]    ni_req_in_valid_i,
  output logic [NumTiles-1:0]    ni_req_in_ready_o,
  input  logic [NarrowFlitW-1:0] ni_req_in_data_i    [NumTiles],
  output logic [NumTiles-1:0]    ni_req_out_valid_o,
  input  logic [NumTiles-1:0]    ni_req_out_ready_i,
  output logic [NarrowFlitW-1:0] ni_req_out_data_o   [NumTiles],
  // Narrow response plane, local ports.
  input  logic [NumTiles-1:0]    ni_rsp_in_valid_i,
  output logic [NumTiles-1:0]    ni_rsp_in_ready_o,
  input  logic [NarrowFlitW-1:0] ni_rsp_in_data_i    [NumTiles],
  output logic [NumTiles-1:0]    ni_rsp_out_valid_o,
  input  logic [NumTiles-1:0]    ni_rsp_out_ready_i,
  output logic [NarrowFlitW-1:0] ni_rsp_out_data_o   [NumTiles]
);

  // Router-side port signals, [tile][direction].
  logic [NumWideVcs-1:0]  w_in_valid  [NumTiles][NumDirs];
  logic [NumWideVcs-1:0]  w_in_ready  [NumTiles][NumDirs];
  logic [WideFlitW-1:0]   w_in_data   [NumTiles][NumDirs];
  logic [NumWideVcs-1:0]  w_out_valid [NumTiles][NumDirs];
  logic [NumWideVcs-1:0]  w_out_ready [NumTiles][NumDirs];
  logic [WideFlitW-1:0]   w_out_data  [NumTiles][NumDirs];

  logic [0:0]             q_in_valid  [NumTiles][NumDirs];
  logic [0:0]             q_in_ready  [NumTiles][NumDirs];
  logic [NarrowFlitW-1:0] q_in_data   [NumTiles][NumDirs];
  logic [0:0]             q_out_valid [NumTiles][NumDirs];
  logic [0:0]             q_out_ready [NumTiles][NumDirs];
  logic [NarrowFlitW-1:0] q_out_data  [NumTiles][NumDirs];

  logic [0:0]             s_in_valid  [NumTiles][NumDirs];
  logic [0:0]             s_in_ready  [NumTiles][NumDirs];
  logic [NarrowFlitW-1:0] s_in_data   [NumTiles][NumDirs];
  logic [0:0]             s_out_valid [NumTiles][NumDirs];
  logic [0:0]             s_out_ready [NumTiles][NumDirs];
  logic [NarrowFlitW-1:0] s_out_data  [NumTiles][NumDirs];

  for (genvar y = 0; y < NumY; y++) begin : gen_y
    for (genvar x = 0; x < NumX; x++) begin : gen_x
      localparam int unsigned T = y * NumX + x;
      coord_t id;
      assign id.x = CoordW'(x);
      assign id.y = CoordW'(y);

      pvc_tile #(.WideW(WideW), .NarrowW(NarrowW)) i_tile (
        .clk_i,
        .rst_ni,
        .id_i             (id),
        .wide_in_valid_i  (w_in_valid[T]),
        .wide_in_ready_o  (w_in_ready[T]),
        .wide_in_data_i   (w_in_data[T]),
        .wide_out_valid_o (w_out_valid[T]),
        .wide_out_ready_i (w_out_ready[T]),
        .wide_out_data_o  (w_out_data[T]),
        .req_in_valid_i   (q_in_valid[T]),
        .req_in_ready_o   (q_in_ready[T]),
        .req_in_data_i    (q_in_data[T]),
        .req_out_valid_o  (q_out_valid[T]),
        .req_out_ready_i  (q_out_ready[T]),
        .req_out_data_o   (q_out_data[T]),
        .rsp_in_valid_i   (s_in_valid[T]),
        .rsp_in_ready_o   (s_in_ready[T]),
        .rsp_in_data_i    (s_in_data[T]),
        .rsp_out_valid_o  (s_out_valid[T]),
        .rsp_out_ready_i  (s_out_ready[T]),
        .rsp_out_data_o   (s_out_data[T])
      );

      // Local ports to the top level.
      assign w_in_valid[T][Eject]  = ni_wide_in_valid_i[T];
      assign w_in_data[T][Eject]   = ni_wide_in_data_i[T];
      assign ni_wide_in_ready_o[T] = w_in_ready[T][Eject];
      assign ni_wide_out_valid_o[T] = w_out_valid[T][Eject];
      assign ni_wide_out_data_o[T]  = w_out_data[T][Eject];
      assign w_out_ready[T][Eject]  = ni_wide_out_ready_i[T];

      assign q_in_valid[T][Eject]   = ni_req_in_valid_i[T];
      assign q_in_data[T][Eject]    = ni_req_in_data_i[T];
      assign ni_req_in_ready_o[T]   = q_in_ready[T][Eject];
      assign ni_req_out_valid_o[T]  = q_out_valid[T][Eject];
      assign ni_req_out_data_o[T]   = q_out_data[T][Eject];
      assign q_out_ready[T][Eject]  = ni_req_out_ready_i[T];

      assign s_in_valid[T][Eject]   = ni_rsp_in_valid_i[T];
      assign s_in_data[T][Eject]    = ni_rsp_in_data_i[T];
      assign ni_rsp_in_ready_o[T]   = s_in_ready[T][Eject];
      assign ni_rsp_out_valid_o[T]  = s_out_valid[T][Eject];
      assign ni_rsp_out_data_o[T]   = s_out_data[T][Eject];
      assign s_out_ready[T][Eject]  = ni_rsp_out_ready_i[T];

      // Mesh links. For each direction: the input of this tile is the
      // opposite-direction output of the neighbour, and this tile's output
      // ready is the neighbour's input ready on the opposite side.
      for (genvar d = 0; d < 4; d++) begin : gen_dir
        localparam int  Nx  = (d == int'(East)) ? x + 1 : (d == int'(West)) ? x - 1 : x;
        localparam int  Ny  = (d == int'(North)) ? y + 1 : (d == int'(South)) ? y - 1 : y;
        localparam int  Opp = (d + 2) % 4;
        if (Nx >= 0 && Nx < int'(NumX) && Ny >= 0 && Ny < int'(NumY)) begin : gen_link
          localparam int unsigned N = Ny * NumX + Nx;
          assign w_in_valid[T][d]  = w_out_valid[N][Opp];
          assign w_in_data[T][d]   = w_out_data[N][Opp];
          assign w_out_ready[T][d] = w_in_ready[N][Opp];
          assign q_in_valid[T][d]  = q_out_valid[N][Opp];
          assign q_in_data[T][d]   = q_out_data[N][Opp];
          assign q_out_ready[T][d] = q_in_ready[N][Opp];
          assign s_in_valid[T][d]  = s_out_valid[N][Opp];
          assign s_in_data[T][d]   = s_out_data[N][Opp];
          assign s_out_ready[T][d] = s_in_ready[N][Opp];
        end else begin : gen_edge
          assign w_in_valid[T][d]  = '0;
          assign w_in_data[T][d]   = '0;
          assign w_out_ready[T][d] = '0;
          assign q_in_valid[T][d]  = '0;
          assign q_in_data[T][d]   = '0;
          assign q_out_ready[T][d] = '0;
          assign s_in_valid[T][d]  = '0;
          assign s_in_data[T][d]   = '0;
          assign s_out_ready[T][d] = '0;
        end
      end
    end
  end

endmodule
