// pvc_vc_rx: VC input port. Receives the shared physical link and sorts
// flits into one input buffer per VC.
//
// The sender raises at most one of the per-VC valid wires per cycle; the
// flit on the shared data wires is written into the buffer of that VC when
// the buffer has room. Each VC's ready wire is its own buffer's "not full",
// so every traffic class has independent backpressure: a full write-data
// buffer never stops read data. Ready is a register output (no
// combinational path from the router behind the buffer back over the link).
// The paper gives the per-VC input buffers behind a shared link (Fig. 3,
// "West Input"); the buffer depth of 2 is this design's choice.
//
// Timing: a flit accepted in cycle t is presented on out_valid_o in t+1.
module pvc_vc_rx #(
  parameter int unsigned NumVc    = 2,
  parameter int unsigned FlitW    = 16,
  parameter int unsigned BufDepth = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [NumVc-1:0] link_valid_i,
  output logic [NumVc-1:0] link_ready_o,
  input  logic [FlitW-1:0] link_data_i,
  output logic [NumVc-1:0] out_valid_o,
  input  logic [NumVc-1:0] out_ready_i,
  output logic [FlitW-1:0] out_data_o [NumVc]
);
  for (genvar v = 0; v < NumVc; v++) begin : gen_buf
    pvc_fifo #(.Width(FlitW), .Depth(BufDepth)) i_in_buf (
      .clk_i,
      .rst_ni,
      .in_valid_i  (link_valid_i[v]),
      .in_ready_o  (link_ready_o[v]),
      .in_data_i   (link_data_i),
      .out_valid_o (out_valid_o[v]),
      .out_ready_i (out_ready_i[v]),
      .out_data_o  (out_data_o[v])
    );
  end

  // The shared data wires can carry one VC's flit per cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(link_valid_i));

endmodule
