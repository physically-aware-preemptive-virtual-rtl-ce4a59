// tb_pvc_router: self-checking test of the five-port two-VC router
// (payload reduced to 16 bits, tile coordinate (1,1) of a 4 x 4 mesh).
// Sender models on all five input links inject bursts of 1..3 flits on
// both VCs to random destinations; receiver models on all five output links
// apply random per-VC ready. Checks: XY output port (computed here), VC
// preserved, per (input, VC, output) order, no interleaving of bursts per
// output VC, completeness, two-cycle hop latency, full-rate streaming, and
// that read data keeps flowing through a link whose write VC is blocked.
// Payload: [15:13] input port, [12] VC, [11:0] sequence number.
module tb_pvc_router;
  import pvc_pkg::*;
  localparam int unsigned V = 2, DW = 16, FW = DW + HdrW;
  localparam int unsigned P = NumDirs;
  logic clk = 0, rst_n = 0;
  coord_t id;
  logic [V-1:0]  in_valid [P], in_ready [P], out_valid [P], out_ready [P];
  logic [FW-1:0] in_data [P], out_data [P];
  int checks = 0, failures = 0;

  typedef logic [FW-1:0] flit_t;
  flit_t exp_q [P][V][P][$];   // [in][vc][out]
  flit_t pend_q [P][V][$];     // flits waiting to be injected
  int lock_in [P][V];          // output burst lock model: input or -1
  int seq [P][V];
  int sent = 0, recvd = 0;
  int n_out [P][V];
  bit rand_ready;
  logic [V-1:0] fixed_ready [P];
  logic [V-1:0] prev_ready [P];

  always #5 clk = ~clk;

  pvc_router #(.NumVc(V), .DataW(DW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .id_i(id),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int xy_port(input int dx, input int dy);
    if (dx > 1) return 1;        // East
    if (dx < 1) return 3;        // West
    if (dy > 1) return 0;        // North
    if (dy < 1) return 2;        // South
    return 4;                    // Eject
  endfunction

  // Queue a burst of len flits from input p on VC v to (dx, dy).
  task automatic add_burst(input int p, input int v, input int dx, input int dy, input int len);
    for (int k = 0; k < len; k++) begin
      hdr_t h;
      flit_t f;
      h.src.x = 0; h.src.y = 0;
      h.dst.x = CoordW'(dx); h.dst.y = CoordW'(dy);
      h.last = (k == len - 1);
      f = {3'(p), 1'(v), 12'(seq[p][v]), h};
      seq[p][v]++;
      pend_q[p][v].push_back(f);
      exp_q[p][v][xy_port(dx, dy)].push_back(f);
      sent++;
    end
  endtask

  // One cycle: each input link offers the head flit of one VC.
  task automatic cycle();
    int chosen [P];
    for (int p = 0; p < P; p++) begin
      int c0, c1;
      in_valid[p] = '0;
      chosen[p] = -1;
      // Like a preemptive sender: skip a VC whose ready was low last cycle.
      c0 = (prev_ready[p][0] || pend_q[p][1].size() == 0) ? pend_q[p][0].size() : 0;
      c1 = (prev_ready[p][1] || pend_q[p][0].size() == 0) ? pend_q[p][1].size() : 0;
      if (c0 > 0 && c1 > 0) chosen[p] = $urandom_range(0, 1);
      else if (c0 > 0) chosen[p] = 0;
      else if (c1 > 0) chosen[p] = 1;
      if (chosen[p] >= 0) begin
        in_valid[p][chosen[p]] = 1'b1;
        in_data[p] = pend_q[p][chosen[p]][0];
      end
      out_ready[p] = rand_ready ? V'($urandom) : fixed_ready[p];
    end
    #1;
    for (int o = 0; o < P; o++) begin
      check($onehot0(out_valid[o]), "one VC per output link");
      for (int v = 0; v < V; v++) if (out_valid[o][v] && out_ready[o][v]) begin
        flit_t f;
        int ip;
        hdr_t h;
        f = out_data[o];
        h = hdr_t'(f[HdrW-1:0]);
        ip = int'(f[FW-1 -: 3]);
        check(int'(f[FW-4]) == v, "VC preserved");
        check(ip < P && exp_q[ip][v][o].size() > 0 && exp_q[ip][v][o][0] == f,
              "XY port and per-input order");
        if (ip < P && exp_q[ip][v][o].size() > 0) void'(exp_q[ip][v][o].pop_front());
        check(lock_in[o][v] < 0 || lock_in[o][v] == ip, "no burst interleaving");
        lock_in[o][v] = h.last ? -1 : ip;
        n_out[o][v]++;
        recvd++;
      end
    end
    begin
      logic [V-1:0] took [P];
      for (int p = 0; p < P; p++) begin
        took[p] = in_valid[p] & in_ready[p];
        prev_ready[p] = in_ready[p];
      end
      @(posedge clk);
      @(negedge clk);
      for (int p = 0; p < P; p++)
        for (int v = 0; v < V; v++) if (took[p][v]) void'(pend_q[p][v].pop_front());
    end
  endtask

  task automatic clear_counts();
    for (int o = 0; o < P; o++) for (int v = 0; v < V; v++) n_out[o][v] = 0;
  endtask

  initial begin
    id.x = 1; id.y = 1;
    rand_ready = 0;
    for (int p = 0; p < P; p++) begin
      in_valid[p] = '0; in_data[p] = '0; out_ready[p] = '1; fixed_ready[p] = '1; prev_ready[p] = '1;
      for (int v = 0; v < V; v++) begin lock_in[p][v] = -1; seq[p][v] = 0; n_out[p][v] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Hop latency: one flit West -> East, accepted in cycle 0, leaves in cycle 2.
    add_burst(3, 1, 2, 1, 1);
    cycle();
    check(pend_q[3][1].size() == 0, "flit accepted");
    cycle();
    check(n_out[1][1] == 0, "not out after one cycle");
    cycle();
    check(n_out[1][1] == 1, "out after two cycles");

    // Full rate: a 60-flit read burst West -> East streams at one per cycle.
    add_burst(3, 1, 3, 1, 60);
    repeat (3) cycle();
    clear_counts();
    repeat (50) cycle();
    check(n_out[1][1] == 50, "full rate through router and link");
    repeat (15) cycle();

    // Blocked write VC: East receiver holds VC 0 ready low. Write and read
    // bursts both West -> East; reads must still stream.
    fixed_ready[1] = 2'b10;
    add_burst(3, 0, 3, 1, 40);
    add_burst(3, 1, 3, 1, 60);
    repeat (12) cycle();
    clear_counts();
    repeat (30) cycle();
    check(n_out[1][0] == 0, "write VC blocked");
    check(n_out[1][1] == 30, "read VC streams at full rate past blocked write VC");
    $display("blocked-write phase: read flits=%0d in 30 cycles", n_out[1][1]);
    fixed_ready[1] = 2'b11;
    repeat (60) cycle();

    // Random traffic on all ports and VCs.
    rand_ready = 1;
    for (int c = 0; c < 3000; c++) begin
      for (int p = 0; p < P; p++)
        for (int v = 0; v < V; v++)
          if (pend_q[p][v].size() < 4 && $urandom_range(0, 7) == 0)
            add_burst(p, v, $urandom_range(0, 3), $urandom_range(0, 3), $urandom_range(1, 3));
      cycle();
    end
    rand_ready = 0;
    for (int p = 0; p < P; p++) fixed_ready[p] = '1;
    repeat (100) cycle();
    check(recvd == sent, "all flits delivered");
    $display("sent=%0d received=%0d", sent, recvd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
