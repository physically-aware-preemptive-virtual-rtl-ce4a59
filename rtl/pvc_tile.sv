// pvc_tile: the network part of one mesh tile, i.e. the three routers that
// sit at a tile's corner in a FlooNoC-style network.
//
//   wide plane  : AXI4 wide W and wide R data beats. Two VCs on one shared
//                 physical link per direction (VC 0 = write data, VC 1 = read
//                 data, see pvc_pkg), preemptive link arbitration. This is
//                 the router the paper proposes in place of a second wide
//                 plane.
//   narrow req  : AXI4 AW and AR of both networks and narrow W, one VC.
//   narrow rsp  : AXI4 B of both networks and narrow R, one VC.
//
// The narrow planes are unchanged from the baseline network: they were
// already physically separate, so they are the same router with one VC and
// a narrow payload. All three routers share the tile coordinate and have
// the same five ports (pvc_pkg::route_dir_e); the Eject port of each goes to
// the tile's network interface, which is not part of this RTL.
//
// Timing: two cycles per hop on every plane (see pvc_router).
module pvc_tile
  import pvc_pkg::*;
#(
  parameter int unsigned WideW   = WideDataW,
  parameter int unsigned NarrowW = NarrowDataW,
  localparam int unsigned WideFlitW   = WideW + HdrW,
  localparam int unsigned NarrowFlitW = NarrowW + HdrW
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  coord_t                 id_i,
  // Wide data plane (two VCs per link).
  input  logic [NumWideVcs-1:0]  wide_in_valid_i  [NumDirs],
  output logic [NumWideVcs-1:0]  wide_in_ready_o  [NumDirs],
  input  logic [WideFlitW-1:0]   wide_in_data_i   [NumDirs],
  output logic [NumWideVcs-1:0]  wide_out_valid_o [NumDirs],
  input  logic [NumWideVcs-1:0]  wide_out_ready_i [NumDirs],
  output logic [WideFlitW-1:0]   wide_out_data_o  [NumDirs],
  // Narrow request plane.
  input  logic [0:0]             req_in_valid_i   [NumDirs],
  output logic [0:0]             req_in_ready_o   [NumDirs],
  input  logic [NarrowFlitW-1:0] req_in_data_i    [NumDirs],
  output logic [0:0]             req_out_valid_o  [NumDirs],
  input  logic [0:0]             req_out_ready_i  [NumDirs],
  output logic [NarrowFlitW-1:0] req_out_data_o   [NumDirs],
  // Narrow response plane.
  input  logic [0:0]             rsp_in_valid_i   [NumDirs],
  output logic [0:0]             rsp_in_ready_o   [NumDirs],
  input  logic [NarrowFlitW-1:0] rsp_in_data_i    [NumDirs],
  output logic [0:0]             rsp_out_valid_o  [NumDirs],
  input  logic [0:0]             rsp_out_ready_i  [NumDirs],
  output logic [NarrowFlitW-1:0] rsp_out_data_o   [NumDirs]
);

  pvc_router #(.NumVc(NumWideVcs), .DataW(WideW)) i_wide_router (
    .clk_i,
    .rst_ni,
    .id_i,
    .in_valid_i  (wide_in_valid_i),
    .in_ready_o  (wide_in_ready_o),
    .in_data_i   (wide_in_data_i),
    .out_valid_o (wide_out_valid_o),
    .out_ready_i (wide_out_ready_i),
    .out_data_o  (wide_out_data_o)
  );

  pvc_router #(.NumVc(1), .DataW(NarrowW)) i_req_router (
    .clk_i,
    .rst_ni,
    .id_i,
    .in_valid_i  (req_in_valid_i),
    .in_ready_o  (req_in_ready_o),
    .in_data_i   (req_in_data_i),
    .out_valid_o (req_out_valid_o),
    .out_ready_i (req_out_ready_i),
    .out_data_o  (req_out_data_o)
  );

  pvc_router #(.NumVc(1), .DataW(NarrowW)) i_rsp_router (
    .clk_i,
    .rst_ni,
    .id_i,
    .in_valid_i  (rsp_in_valid_i),
    .in_ready_o  (rsp_in_ready_o),
    .in_data_i   (rsp_in_data_i),
    .out_valid_o (rsp_out_valid_o),
    .out_ready_i (rsp_out_ready_i),
    .out_data_o  (rsp_out_data_o)
  );

endmodule
