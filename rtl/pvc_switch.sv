// pvc_switch: one VC's crossbar with switch allocation and wormhole locking.
//
// Each of the NumIn inputs presents a flit and the one-hot output port its
// route computation chose. For every output a round-robin arbiter picks one
// of the inputs that request it. Once a burst has started through an output
// (a flit without the last flag has passed), that output stays locked to the
// same input until the burst's last flit has passed, so the beats of two
// AXI4 bursts never interleave on one VC. An input is told ready when its
// granted output can take the flit, so a flit crosses the switch in the
// cycle it is granted (single-cycle router).
//
// The wide router replicates this switch once per VC, as the paper's
// implementation does (one switch per channel, Fig. 3). Round-robin
// allocation and burst locking are this design's choices where the paper
// only draws an "SA" block.
//
// Timing: valid and data go from inputs to outputs combinationally; ready
// goes from outputs to inputs combinationally. Both ends are registers in
// the router (input and output buffers).
module pvc_switch #(
  parameter int unsigned NumIn  = 5,
  parameter int unsigned NumOut = 5,
  parameter int unsigned FlitW  = 16,
  // Bit of the flit that carries the end-of-burst flag.
  parameter int unsigned LastBit = 0
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [NumIn-1:0]        in_valid_i,
  output logic [NumIn-1:0]        in_ready_o,
  input  logic [FlitW-1:0]        in_data_i  [NumIn],
  input  logic [NumOut-1:0]       in_route_i [NumIn],
  output logic [NumOut-1:0]       out_valid_o,
  input  logic [NumOut-1:0]       out_ready_i,
  output logic [FlitW-1:0]        out_data_o [NumOut]
);
  localparam int unsigned IdxW = $clog2(NumIn > 1 ? NumIn : 2);

  logic [NumIn-1:0] req     [NumOut];
  logic [NumIn-1:0] arb_gnt [NumOut];
  logic [IdxW-1:0]  arb_idx [NumOut];
  logic [NumIn-1:0] gnt     [NumOut];
  logic [IdxW-1:0]  sel     [NumOut];
  logic [NumOut-1:0] xfer;
  logic [NumOut-1:0] lock_q;
  logic [IdxW-1:0]   lock_idx_q [NumOut];

  for (genvar o = 0; o < NumOut; o++) begin : gen_arb
    pvc_rr_arbiter #(.N(NumIn)) i_arb (
      .clk_i,
      .rst_ni,
      .req_i     (req[o]),
      .advance_i (xfer[o] && !lock_q[o]),
      .gnt_o     (arb_gnt[o]),
      .idx_o     (arb_idx[o])
    );
  end

  always_comb begin
    for (int unsigned o = 0; o < NumOut; o++) begin
      for (int unsigned i = 0; i < NumIn; i++) begin
        req[o][i] = in_valid_i[i] && in_route_i[i][o];
      end
    end
  end

  always_comb begin
    for (int unsigned o = 0; o < NumOut; o++) begin
      // A locked output only serves the input whose burst is in flight.
      if (lock_q[o]) begin
        sel[o] = lock_idx_q[o];
        gnt[o] = '0;
        gnt[o][lock_idx_q[o]] = req[o][lock_idx_q[o]];
      end else begin
        sel[o] = arb_idx[o];
        gnt[o] = arb_gnt[o];
      end
      out_valid_o[o] = |gnt[o];
      out_data_o[o]  = in_data_i[sel[o]];
      xfer[o]        = out_valid_o[o] && out_ready_i[o];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lock_q     <= '0;
      lock_idx_q <= '{default: '0};
    end else begin
      for (int unsigned o = 0; o < NumOut; o++) begin
        if (xfer[o]) begin
          lock_q[o]     <= !out_data_o[o][LastBit];
          lock_idx_q[o] <= sel[o];
        end
      end
    end
  end

  always_comb begin
    in_ready_o = '0;
    for (int unsigned o = 0; o < NumOut; o++) begin
      for (int unsigned i = 0; i < NumIn; i++) begin
        if (gnt[o][i] && out_ready_i[o]) in_ready_o[i] = 1'b1;
      end
    end
  end

  // A flit requests exactly one output.
  for (genvar i = 0; i < NumIn; i++) begin : gen_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni)
      in_valid_i[i] |-> $onehot(in_route_i[i]));
  end

endmodule
