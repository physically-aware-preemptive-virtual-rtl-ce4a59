// pvc_preempt_tx: preemptive VC output port. Several VCs share one physical
// link; ownership of the link moves between them by round-robin arbitration,
// and a VC whose downstream buffer stopped accepting flits is preempted.
//
// This is the block the paper proposes. Each VC has its own output buffer
// and its own valid and ready wires on the link; the flit data wires are
// shared. In every cycle exactly one VC with a buffered flit drives the
// link: its valid is raised ("mask valid": the other VCs' valids are held
// low) and the data multiplexer selects its flit. The choice is made by a
// round-robin arbiter among the VCs that have a flit, preferring those whose
// downstream ready was high in the previous cycle. The ready wires coming
// back over the link are only registered here (ready_q) and used to choose
// the owner of the next cycle; they never gate valid in the same cycle.
// This removes the long ready-to-valid path that runs twice across the tile
// in a naive shared-link design.
//
// Consequence: the owner asserts valid speculatively. If its receiver turns
// out not to be ready, the flit stays in the output buffer, nothing is lost,
// and in the next cycle another VC whose receiver is ready takes the link.
// A flit moves when valid_o[v] && ready_i[v] (the usual valid/ready rule,
// per VC). The ready input still pops the local output buffer in the same
// cycle, as in any valid/ready link. A single VC with a receiver that keeps
// up uses the link in every cycle; two such VCs alternate cycle by cycle.
//
// Paper-given: shared link with per-VC valid/ready, round-robin ownership
// among valid streams, registered downstream ready deciding next-cycle
// ownership, preemption of a stalled stream. Own choices: preferring VCs
// whose registered ready is high, falling back to all VCs with a flit when
// none is, and advancing the round-robin pointer after each transferred
// flit.
module pvc_preempt_tx #(
  parameter int unsigned NumVc    = 2,
  parameter int unsigned FlitW    = 16,
  parameter int unsigned BufDepth = 2
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // From the switches, one stream per VC.
  input  logic [NumVc-1:0]   in_valid_i,
  output logic [NumVc-1:0]   in_ready_o,
  input  logic [FlitW-1:0]   in_data_i [NumVc],
  // Physical link: per-VC valid and ready, one shared data bus.
  output logic [NumVc-1:0]   link_valid_o,
  input  logic [NumVc-1:0]   link_ready_i,
  output logic [FlitW-1:0]   link_data_o
);
  localparam int unsigned IdxW = $clog2(NumVc > 1 ? NumVc : 2);

  logic [NumVc-1:0] buf_valid, buf_pop;
  logic [FlitW-1:0] buf_data [NumVc];
  logic [NumVc-1:0] ready_q;
  logic [NumVc-1:0] pref, cand, gnt;
  logic [IdxW-1:0]  sel;

  for (genvar v = 0; v < NumVc; v++) begin : gen_buf
    pvc_fifo #(.Width(FlitW), .Depth(BufDepth)) i_out_buf (
      .clk_i,
      .rst_ni,
      .in_valid_i  (in_valid_i[v]),
      .in_ready_o  (in_ready_o[v]),
      .in_data_i   (in_data_i[v]),
      .out_valid_o (buf_valid[v]),
      .out_ready_i (buf_pop[v]),
      .out_data_o  (buf_data[v])
    );
  end

  // Registered downstream ready: only influences the next cycle's owner.
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ready_q <= '1;
    else         ready_q <= link_ready_i;
  end

  assign pref = buf_valid & ready_q;
  assign cand = (pref != '0) ? pref : buf_valid;

  pvc_rr_arbiter #(.N(NumVc)) i_owner_arb (
    .clk_i,
    .rst_ni,
    .req_i     (cand),
    .advance_i ((link_valid_o & link_ready_i) != '0),
    .gnt_o     (gnt),
    .idx_o     (sel)
  );

  // Mask valid: only the owner's valid reaches the link.
  assign link_valid_o = gnt;
  assign link_data_o  = buf_data[sel];
  assign buf_pop      = link_valid_o & link_ready_i;

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(link_valid_o));

endmodule
