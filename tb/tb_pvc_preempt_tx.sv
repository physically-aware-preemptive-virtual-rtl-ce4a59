// tb_pvc_preempt_tx: self-checking test of the preemptive VC output port.
// Two VC sources feed the port; a receiver model drives the per-VC ready
// wires of the link. Flit layout: [15] VC, [14:0] sequence number.
// Phases:
//   1. one VC streaming, receiver always ready: a flit every cycle;
//   2. both VCs streaming, receiver always ready: the link is busy every
//      cycle and the two VCs share it;
//   3. VC 0 receiver stalled (its downstream buffer full): VC 0's pending
//      flit is preempted in the cycle after its failed attempt and VC 1
//      keeps using the link;
//   4. random sources and random ready.
// Throughout: per-VC order and completeness, at most one valid per cycle,
// and no combinational path from a ready wire to any valid wire.
module tb_pvc_preempt_tx;
  localparam int unsigned V = 2, FW = 16;
  logic clk = 0, rst_n = 0;
  logic [V-1:0] in_valid, in_ready, link_valid, link_ready;
  logic [FW-1:0] in_data [V];
  logic [FW-1:0] link_data;
  int checks = 0, failures = 0;
  int seq_tx [V], seq_rx [V];
  bit src_en [V];
  int n_xfer [V];
  int preemptions = 0;
  logic [V-1:0] prev_stall;

  always #5 clk = ~clk;

  pvc_preempt_tx #(.NumVc(V), .FlitW(FW), .BufDepth(2)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .link_valid_o(link_valid), .link_ready_i(link_ready), .link_data_o(link_data));

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

  // One clock cycle: drive at negedge, sample before posedge.
  task automatic cycle();
    logic [V-1:0] took_in, took_link, v_a, v_b;
    for (int v = 0; v < V; v++) begin
      if (!in_valid[v] && src_en[v]) begin
        in_valid[v] = 1;
        in_data[v]  = {1'(v), 15'(seq_tx[v])};
        seq_tx[v]++;
      end
    end
    #1;
    // Valid must not depend on ready within the cycle.
    v_a = link_valid;
    link_ready = ~link_ready;
    #1;
    v_b = link_valid;
    link_ready = ~link_ready;
    #1;
    check(v_a == v_b, "valid independent of same-cycle ready");
    check($onehot0(link_valid), "one VC on the link");
    // Preemption: a VC that failed last cycle while another VC had a flit
    // and a ready receiver must have lost the link.
    for (int v = 0; v < V; v++)
      if (prev_stall[v] && link_valid != '0 && !link_valid[v]) preemptions++;
    took_in   = in_valid & in_ready;
    took_link = link_valid & link_ready;
    prev_stall = link_valid & ~link_ready;
    for (int v = 0; v < V; v++) begin
      if (took_link[v]) begin
        check(link_data[15] == 1'(v), "flit on its own VC");
        check(int'(link_data[14:0]) == seq_rx[v], "per-VC order");
        seq_rx[v]++;
        n_xfer[v]++;
      end
    end
    @(posedge clk);
    @(negedge clk);
    for (int v = 0; v < V; v++) if (took_in[v]) in_valid[v] = 0;
  endtask

  task automatic drain();
    src_en[0] = 0; src_en[1] = 0;
    link_ready = '1;
    repeat (20) cycle();
    check(seq_rx[0] == seq_tx[0] && seq_rx[1] == seq_tx[1], "all flits delivered");
  endtask

  initial begin
    int t0, t1;
    in_valid = '0; link_ready = '1; prev_stall = '0;
    for (int v = 0; v < V; v++) begin
      in_data[v] = '0; seq_tx[v] = 0; seq_rx[v] = 0; src_en[v] = 0; n_xfer[v] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Phase 1: VC 1 alone at full rate.
    src_en[1] = 1;
    repeat (5) cycle();
    n_xfer = '{0, 0};
    repeat (100) cycle();
    check(n_xfer[1] == 100, "single VC: one flit per cycle");
    drain();

    // Phase 2: both VCs, both receivers ready: link busy every cycle.
    src_en[0] = 1; src_en[1] = 1;
    repeat (5) cycle();
    n_xfer = '{0, 0};
    repeat (100) cycle();
    check(n_xfer[0] + n_xfer[1] == 100, "two VCs: link used every cycle");
    check(n_xfer[0] >= 45 && n_xfer[1] >= 45, "two VCs: round-robin share");
    drain();

    // Phase 3: VC 0 receiver stalls, VC 1 keeps flowing.
    src_en[0] = 1; src_en[1] = 1;
    repeat (5) cycle();
    link_ready[0] = 0;
    preemptions = 0;
    n_xfer = '{0, 0};
    repeat (100) cycle();
    check(n_xfer[0] == 0, "stalled VC moves nothing");
    check(n_xfer[1] >= 98, "other VC keeps the link despite the stalled one");
    check(preemptions >= 1, "stalled VC was preempted");
    $display("phase 3: vc1 flits=%0d preemptions=%0d", n_xfer[1], preemptions);
    drain();

    // Phase 4: random.
    for (int c = 0; c < 3000; c++) begin
      src_en[0] = $urandom_range(0, 3) != 0;
      src_en[1] = $urandom_range(0, 3) != 0;
      link_ready = V'($urandom);
      cycle();
    end
    drain();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
