// pvc_fifo: synchronous flit buffer with a valid/ready interface on both sides.
//
// Used as the per-VC input buffer and output buffer of the router (the
// "Input Buffer" and "Out. Buffer" boxes of a FlooNoC router). The buffer is
// not fall-through: a flit written in cycle t is visible at the output in
// cycle t+1, so the output is always driven from a register. in_ready_o is
// simply "not full" and comes from a register too, which keeps the
// backpressure path free of combinational logic from the consumer side.
// The depth of 2 is this design's choice: the paper states that the
// preemptive scheme needs no buffering beyond the baseline router's, and
// two entries are what a registered ready needs for back-to-back flits.
//
// Interface: in_valid_i/in_ready_o/in_data_i push, out_valid_o/out_ready_i/
// out_data_o pop. A push and a pop may happen in the same cycle; when the
// buffer is full a simultaneous push is not accepted (in_ready_o = 0).
module pvc_fifo #(
  parameter int unsigned Width = 8,
  parameter int unsigned Depth = 2
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             in_valid_i,
  output logic             in_ready_o,
  input  logic [Width-1:0] in_data_i,
  output logic             out_valid_o,
  input  logic             out_ready_i,
  output logic [Width-1:0] out_data_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;
  localparam int unsigned CntW = $clog2(Depth + 1);

  logic [Width-1:0] mem_q [Depth];
  logic [PtrW-1:0]  wr_ptr_q, rd_ptr_q;
  logic [CntW-1:0]  count_q;
  logic             push, pop;

  assign in_ready_o  = (count_q != CntW'(Depth));
  assign out_valid_o = (count_q != '0);
  assign out_data_o  = mem_q[rd_ptr_q];
  assign push = in_valid_i && in_ready_o;
  assign pop  = out_valid_o && out_ready_i;

  function automatic logic [PtrW-1:0] incr(input logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_ptr_q <= '0;
      rd_ptr_q <= '0;
      count_q  <= '0;
    end else begin
      if (push) wr_ptr_q <= incr(wr_ptr_q);
      if (pop)  rd_ptr_q <= incr(rd_ptr_q);
      if (push && !pop)      count_q <= count_q + 1'b1;
      else if (pop && !push) count_q <= count_q - 1'b1;
    end
  end

  // Storage has no reset: entries are only read when count_q says valid.
  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= in_data_i;
  end

  // A flit offered on the output stays there until it is taken.
  property p_out_stable;
    @(posedge clk_i) disable iff (!rst_ni)
      (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o));
  endproperty
  assert property (p_out_stable);

endmodule
