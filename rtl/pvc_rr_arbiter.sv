// pvc_rr_arbiter: round-robin arbiter over N requesters.
//
// gnt_o is one-hot (or zero when nothing requests) and purely combinational
// from req_i and the priority pointer. The requester granted last has the
// lowest priority next time: when advance_i is high in a cycle with a grant,
// the pointer moves to the requester after the granted one. The paper asks
// for round-robin selection of link ownership and of switch outputs; the
// pointer-update rule is the common one and is this design's choice.
//
// Interface: req_i requests, advance_i "the grant was used", gnt_o one-hot
// grant, idx_o its index (0 when nothing is granted).
module pvc_rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [N-1:0]               req_i,
  input  logic                       advance_i,
  output logic [N-1:0]               gnt_o,
  output logic [$clog2(N > 1 ? N : 2)-1:0] idx_o
);
  localparam int unsigned IdxW = $clog2(N > 1 ? N : 2);

  logic [IdxW-1:0] ptr_q;   // requester with the highest priority

  always_comb begin
    logic          found;
    logic [IdxW:0] i;
    gnt_o = '0;
    idx_o = '0;
    found = 1'b0;
    // Scan N positions starting at ptr_q, take the first requester.
    for (int unsigned k = 0; k < N; k++) begin
      i = {1'b0, ptr_q} + (IdxW+1)'(k);
      if (i >= (IdxW+1)'(N)) i = i - (IdxW+1)'(N);
      if (!found && req_i[i[IdxW-1:0]]) begin
        found = 1'b1;
        idx_o = i[IdxW-1:0];
      end
    end
    if (found) gnt_o[idx_o] = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (advance_i && (gnt_o != '0)) begin
      ptr_q <= (idx_o == IdxW'(N - 1)) ? '0 : idx_o + 1'b1;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni) ((gnt_o & ~req_i) == '0));

endmodule
