// tb_pvc_vc_rx: self-checking test of the VC input port. A sender model
// puts at most one VC's flit on the shared link per cycle; the consumer
// behind each VC buffer pops at random. Checks per-VC order and
// completeness, one-cycle latency, and that a full VC buffer drops only its
// own ready while the other VC keeps accepting flits.
// Flit layout: [15] VC, [14:0] sequence number.
module tb_pvc_vc_rx;
  localparam int unsigned V = 2, FW = 16;
  logic clk = 0, rst_n = 0;
  logic [V-1:0] link_valid, link_ready, out_valid, out_ready;
  logic [FW-1:0] link_data;
  logic [FW-1:0] out_data [V];
  int checks = 0, failures = 0;
  int seq_tx [V], seq_rx [V];

  always #5 clk = ~clk;

  pvc_vc_rx #(.NumVc(V), .FlitW(FW), .BufDepth(2)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .link_valid_i(link_valid), .link_ready_o(link_ready), .link_data_i(link_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive VC v (or none if v < 0) for one cycle, with the given pops.
  task automatic cycle(input int v, input logic [V-1:0] pops);
    logic [V-1:0] took, popped;
    link_valid = '0;
    if (v >= 0) begin
      link_valid[v] = 1'b1;
      link_data = {1'(v), 15'(seq_tx[v])};
    end
    out_ready = pops;
    #1;
    took = link_valid & link_ready;
    popped = out_valid & out_ready;
    for (int k = 0; k < V; k++) if (popped[k]) begin
      check(out_data[k][15] == 1'(k), "flit in its own VC buffer");
      check(int'(out_data[k][14:0]) == seq_rx[k], "per-VC order");
      seq_rx[k]++;
    end
    @(posedge clk);
    @(negedge clk);
    for (int k = 0; k < V; k++) if (took[k]) seq_tx[k]++;
  endtask

  initial begin
    link_valid = '0; out_ready = '0; link_data = '0;
    seq_tx = '{0, 0}; seq_rx = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Latency: a flit accepted now is presented next cycle.
    cycle(1, 2'b00);
    check(out_valid == 2'b10, "one-cycle latency, right VC");
    cycle(-1, 2'b10);
    check(out_valid == 2'b00, "popped");
    // VC 0 fills while its consumer is stalled; VC 1 stays open.
    cycle(0, 2'b00);
    cycle(0, 2'b00);
    check(link_ready == 2'b10, "full VC 0 drops only its own ready");
    for (int i = 0; i < 10; i++) begin
      cycle(1, 2'b10);
      check(link_ready[1], "VC 1 keeps accepting");
    end
    check(seq_rx[1] >= 10, "VC 1 flowed past blocked VC 0");
    cycle(-1, 2'b11);
    cycle(-1, 2'b11);
    cycle(-1, 2'b11);
    // Random traffic.
    for (int c = 0; c < 4000; c++)
      cycle($urandom_range(0, 2) == 2 ? -1 : int'($urandom_range(0, 1)), V'($urandom));
    for (int c = 0; c < 5; c++) cycle(-1, 2'b11);
    check(seq_rx[0] == seq_tx[0] && seq_rx[1] == seq_tx[1], "all flits delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
