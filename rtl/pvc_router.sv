// pvc_router: five-port single-cycle NoC router whose physical links are
// shared by NumVc statically bound virtual channels (preemptive VCs).
//
// Structure, per port: a pvc_vc_rx (one input buffer per VC behind the
// shared link), XY route computation on each buffer's head flit, one
// pvc_switch per VC (the switches are replicated, not shared between VCs),
// and a pvc_preempt_tx (one output buffer per VC and the preemptive link
// arbiter). A VC never changes: a flit entering on VC v leaves on VC v, so
// AXI4 write data and read data are kept apart end to end and one class can
// not block the other on a shared link. This is what breaks the
// protocol-level circular wait between a DMA's read and write streams.
//
// Instantiated with NumVc = 2 and a 512-bit payload it is the wide data
// router the paper proposes; with NumVc = 1 it degenerates to a plain
// valid/ready router, used for the narrow request and response planes.
//
// Timing: a flit written into an input buffer in cycle t crosses the switch
// into an output buffer in cycle t+1 and is offered on the output link from
// cycle t+2, so a hop (router plus link) takes two cycles when nothing
// blocks. Buffer depths of 2 are this design's choice.
//
// Ports: index with pvc_pkg::route_dir_e (North, East, South, West, Eject).
// Per port: per-VC valid and ready, one shared flit bus {payload, hdr_t}.
module pvc_router
  import pvc_pkg::*;
#(
  parameter int unsigned NumVc     = NumWideVcs,
  parameter int unsigned DataW     = WideDataW,
  parameter int unsigned InDepth   = 2,
  parameter int unsigned OutDepth  = 2,
  localparam int unsigned FlitW    = DataW + HdrW
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  coord_t           id_i,
  input  logic [NumVc-1:0] in_valid_i  [NumDirs],
  output logic [NumVc-1:0] in_ready_o  [NumDirs],
  input  logic [FlitW-1:0] in_data_i   [NumDirs],
  output logic [NumVc-1:0] out_valid_o [NumDirs],
  input  logic [NumVc-1:0] out_ready_i [NumDirs],
  output logic [FlitW-1:0] out_data_o  [NumDirs]
);
  // Input-buffer side, indexed [port].
  logic [NumVc-1:0] ib_valid [NumDirs];
  logic [NumVc-1:0] ib_ready [NumDirs];
  logic [FlitW-1:0] ib_data  [NumDirs][NumVc];

  // Switch side, indexed [vc].
  logic [NumDirs-1:0] sw_in_valid  [NumVc];
  logic [NumDirs-1:0] sw_in_ready  [NumVc];
  logic [FlitW-1:0]   sw_in_data   [NumVc][NumDirs];
  logic [NumDirs-1:0] sw_in_route  [NumVc][NumDirs];
  logic [NumDirs-1:0] sw_out_valid [NumVc];
  logic [NumDirs-1:0] sw_out_ready [NumVc];
  logic [FlitW-1:0]   sw_out_data  [NumVc][NumDirs];

  // Output-buffer side, indexed [port].
  logic [NumVc-1:0] ob_valid [NumDirs];
  logic [NumVc-1:0] ob_ready [NumDirs];
  logic [FlitW-1:0] ob_data  [NumDirs][NumVc];

  for (genvar p = 0; p < NumDirs; p++) begin : gen_port
    pvc_vc_rx #(.NumVc(NumVc), .FlitW(FlitW), .BufDepth(InDepth)) i_rx (
      .clk_i,
      .rst_ni,
      .link_valid_i (in_valid_i[p]),
      .link_ready_o (in_ready_o[p]),
      .link_data_i  (in_data_i[p]),
      .out_valid_o  (ib_valid[p]),
      .out_ready_i  (ib_ready[p]),
      .out_data_o   (ib_data[p])
    );

    pvc_preempt_tx #(.NumVc(NumVc), .FlitW(FlitW), .BufDepth(OutDepth)) i_tx (
      .clk_i,
      .rst_ni,
      .in_valid_i   (ob_valid[p]),
      .in_ready_o   (ob_ready[p]),
      .in_data_i    (ob_data[p]),
      .link_valid_o (out_valid_o[p]),
      .link_ready_i (out_ready_i[p]),
      .link_data_o  (out_data_o[p])
    );

    for (genvar v = 0; v < NumVc; v++) begin : gen_vc
      hdr_t hdr;
      assign hdr = hdr_t'(ib_data[p][v][HdrW-1:0]);

      pvc_xy_route i_rc (
        .id_i    (id_i),
        .dst_i   (hdr.dst),
        .route_o (sw_in_route[v][p])
      );

      assign sw_in_valid[v][p] = ib_valid[p][v];
      assign sw_in_data[v][p]  = ib_data[p][v];
      assign ib_ready[p][v]    = sw_in_ready[v][p];

      assign ob_valid[p][v]     = sw_out_valid[v][p];
      assign ob_data[p][v]      = sw_out_data[v][p];
      assign sw_out_ready[v][p] = ob_ready[p][v];
    end
  end

  for (genvar v = 0; v < NumVc; v++) begin : gen_switch
    pvc_switch #(
      .NumIn   (NumDirs),
      .NumOut  (NumDirs),
      .FlitW   (FlitW),
      .LastBit (0)
    ) i_switch (
      .clk_i,
      .rst_ni,
      .in_valid_i  (sw_in_valid[v]),
      .in_ready_o  (sw_in_ready[v]),
      .in_data_i   (sw_in_data[v]),
      .in_route_i  (sw_in_route[v]),
      .out_valid_o (sw_out_valid[v]),
      .out_ready_i (sw_out_ready[v]),
      .out_data_o  (sw_out_data[v])
    );
  end

endmodule
