// tb_pvc_mesh: end-to-end test of the 4 x 4 mesh, with the wide payload
// reduced to 32 bits so that it builds quickly (tb_pvc_mesh_full is the
// same test with every parameter at its default). Beat counts still
// assume the 64-byte beats of a 512-bit link.
// Every tile has an endpoint model in place of its network interface:
// it injects bursts from per-VC queues (choosing, like the routers, a VC
// whose ready was high last cycle) and checks every flit it receives.
//
//   Phase A, broadcast workload: data of S bytes is copied from tile 0 to
//     all 16 tiles with a binary tree (4 rounds: 1 -> 2 -> 4 -> 8 -> 16
//     holders), as 64-byte beats in AXI4 bursts of at most 256 beats,
//     for S = 1, 2, 4, 8, 16 and 32 KiB; once as writes (beats on VC 0)
//     and once as reads (beats on VC 1). Each round must take no more than
//     its beat count plus a small latency bound: the link runs at full rate.
//   Phase B, endpoint deadlock scenario: tile 0's write-data ejection is
//     held (its L1 memory busy) while an external initiator at tile 3 keeps
//     writing to it, and read data for tile 0's DMA streams from tile 2
//     over the same links. The read data must keep arriving at full rate
//     through links whose write VC is stalled; afterwards all writes drain.
//   Phase C, random traffic on all three planes and both VCs with random
//     ejection backpressure.
// Each received flit is checked for destination, VC, per-(source, VC)
// order and payload. Mechanism counters (link preemptions, stalled VC
// cycles, cycles in which the two VCs shared a link, burst locks held,
// narrow flits) must each be non-zero at the end.
module tb_pvc_mesh;
  import pvc_pkg::*;
  localparam int unsigned NX = 4, NY = 4, NT = NX * NY;
  localparam int unsigned WW = 32;
  localparam int unsigned WF = WW + HdrW, NF = NarrowDataW + HdrW;
  localparam int unsigned MaxBurst = 256;
  localparam int unsigned BeatBytes = 64;   // 512-bit beat of the full-size link

  logic clk = 0, rst_n = 0;
  logic [1:0]    w_iv [NT], w_ir [NT], w_ov [NT], w_or [NT];
  logic [WF-1:0] w_id [NT], w_od [NT];
  logic [NT-1:0] q_iv, q_ir, q_ov, q_or, s_iv, s_ir, s_ov, s_or;
  logic [NF-1:0] q_id [NT], q_od [NT], s_id [NT], s_od [NT];

  int checks = 0, failures = 0;
  longint cycle_no = 0;
  // Loop bounds held in variables keep the simulator from unrolling the
  // per-tile endpoint loops (much shorter build).
  int nt = NT, nlinks = 4, nvc = 2;

  // Wide injection queues: flits already built, [tile][vc].
  typedef logic [WF-1:0] wflit_t;
  typedef logic [NF-1:0] nflit_t;
  wflit_t wq [NT][2][$];
  nflit_t qq [NT][$], sq [NT][$];
  logic [1:0] prev_ready [NT];
  // Sequence numbers: sent [src][dst][vc] and expected at the receiver.
  int wseq_tx [NT][NT][2], wseq_rx [NT][NT][2];
  int nseq_tx [2][NT][NT], nseq_rx [2][NT][NT];
  int wide_rx_total = 0, wide_tx_total = 0, narrow_rx_total = 0, narrow_tx_total = 0;
  int rx_count [NT][2];
  logic [1:0] eject_ready [NT];
  bit rand_eject;

  // Mechanism counters.
  int n_preempt = 0, n_stall = 0, n_shared = 0, n_locked = 0;
  logic [1:0] link_stall_q [NT][4];
  logic [1:0] link_last_vc [NT][4];

  always #5 clk = ~clk;

  pvc_mesh #(.WideW(WW)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .ni_wide_in_valid_i(w_iv), .ni_wide_in_ready_o(w_ir), .ni_wide_in_data_i(w_id),
    .ni_wide_out_valid_o(w_ov), .ni_wide_out_ready_i(w_or), .ni_wide_out_data_o(w_od),
    .ni_req_in_valid_i(q_iv), .ni_req_in_ready_o(q_ir), .ni_req_in_data_i(q_id),
    .ni_req_out_valid_o(q_ov), .ni_req_out_ready_i(q_or), .ni_req_out_data_o(q_od),
    .ni_rsp_in_valid_i(s_iv), .ni_rsp_in_ready_o(s_ir), .ni_rsp_in_data_i(s_id),
    .ni_rsp_out_valid_o(s_ov), .ni_rsp_out_ready_i(s_or), .ni_rsp_out_data_o(s_od));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s (cycle %0d)", msg, cycle_no);
    end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic coord_t xy(input int t);
    coord_t c;
    c.x = CoordW'(t % NX);
    c.y = CoordW'(t / NX);
    return c;
  endfunction

  // Payload of a wide beat: fully determined by source, destination, VC and
  // sequence number, so the receiver can recompute it.
  function automatic logic [WW-1:0] wpay(input int s, input int d, input int v, input int n);
    logic [WW-1:0] p;
    for (int j = 0; j < WW / 32; j++)
      p[j*32 +: 32] = 32'(n) * 32'h9E3779B1 + 32'(j * 65537) + 32'(s * 4099 + d * 257 + v * 17);
    p[31:0] = 32'(n);
    return p;
  endfunction

  function automatic logic [NarrowDataW-1:0] npay(input int pl, input int s, input int d, input int n);
    return {16'(pl), 8'(s), 8'(d), 32'(n)};
  endfunction

  // Queue a transfer of nbeats wide beats from s to d on VC v, cut into
  // bursts of at most MaxBurst beats.
  task automatic send_wide(input int s, input int d, input int v, input int nbeats);
    for (int k = 0; k < nbeats; k++) begin
      hdr_t h;
      h.src = xy(s); h.dst = xy(d);
      h.last = ((k % MaxBurst) == MaxBurst - 1) || (k == nbeats - 1);
      wq[s][v].push_back({wpay(s, d, v, wseq_tx[s][d][v]), h});
      wseq_tx[s][d][v]++;
      wide_tx_total++;
    end
  endtask

  task automatic send_narrow(input int pl, input int s, input int d);
    hdr_t h;
    h.src = xy(s); h.dst = xy(d); h.last = 1'b1;
    if (pl == 0) qq[s].push_back({npay(pl, s, d, nseq_tx[pl][s][d]), h});
    else         sq[s].push_back({npay(pl, s, d, nseq_tx[pl][s][d]), h});
    nseq_tx[pl][s][d]++;
    narrow_tx_total++;
  endtask

  // One clock cycle of all endpoint models.
  task automatic cycle();
    logic [1:0] w_took [NT];
    logic [NT-1:0] q_took, s_took;
    for (int t = 0; t < nt; t++) begin
      int c0, c1, vsel;
      c0 = (prev_ready[t][0] || wq[t][1].size() == 0) ? wq[t][0].size() : 0;
      c1 = (prev_ready[t][1] || wq[t][0].size() == 0) ? wq[t][1].size() : 0;
      vsel = -1;
      if (c0 > 0 && c1 > 0) vsel = int'(cycle_no % 2);
      else if (c0 > 0) vsel = 0;
      else if (c1 > 0) vsel = 1;
      w_iv[t] = '0;
      if (vsel >= 0) begin
        w_iv[t][vsel] = 1'b1;
        w_id[t] = wq[t][vsel][0];
      end
      q_iv[t] = qq[t].size() > 0;
      if (q_iv[t]) q_id[t] = qq[t][0];
      s_iv[t] = sq[t].size() > 0;
      if (s_iv[t]) s_id[t] = sq[t][0];
      w_or[t] = rand_eject ? 2'($urandom) : eject_ready[t];
      q_or[t] = rand_eject ? 1'($urandom) : 1'b1;
      s_or[t] = rand_eject ? 1'($urandom) : 1'b1;
    end
    #1;
    // Receivers.
    for (int t = 0; t < nt; t++) begin
      for (int v = 0; v < nvc; v++) if (w_ov[t][v] && w_or[t][v]) begin
        hdr_t h;
        int s;
        h = hdr_t'(w_od[t][HdrW-1:0]);
        s = int'(h.src.y) * NX + int'(h.src.x);
        check(h.dst == xy(t), "wide flit at its destination");
        check(w_od[t][WF-1:HdrW] == wpay(s, t, v, wseq_rx[s][t][v]), "wide payload, VC and order");
        wseq_rx[s][t][v]++;
        rx_count[t][v]++;
        wide_rx_total++;
      end
      if (q_ov[t] && q_or[t]) begin
        hdr_t h;
        int s;
        h = hdr_t'(q_od[t][HdrW-1:0]);
        s = int'(h.src.y) * NX + int'(h.src.x);
        check(h.dst == xy(t) && q_od[t][NF-1:HdrW] == npay(0, s, t, nseq_rx[0][s][t]), "request flit");
        nseq_rx[0][s][t]++;
        narrow_rx_total++;
      end
      if (s_ov[t] && s_or[t]) begin
        hdr_t h;
        int s;
        h = hdr_t'(s_od[t][HdrW-1:0]);
        s = int'(h.src.y) * NX + int'(h.src.x);
        check(h.dst == xy(t) && s_od[t][NF-1:HdrW] == npay(1, s, t, nseq_rx[1][s][t]), "response flit");
        nseq_rx[1][s][t]++;
        narrow_rx_total++;
      end
    end
    // Mechanism counters on the wide mesh links.
    for (int t = 0; t < nt; t++)
      for (int d = 0; d < nlinks; d++) begin
        logic [1:0] v, r;
        v = dut.w_out_valid[t][d];
        r = dut.w_out_ready[t][d];
        check($onehot0(v), "one VC per link cycle");
        if (link_stall_q[t][d] != 0 && v != 0 && (v & link_stall_q[t][d]) == 0) n_preempt++;
        if ((v & ~r) != 0) n_stall++;
        if ((v & r) != 0) begin
          if (link_last_vc[t][d] != 0 && (v & r) != link_last_vc[t][d]) n_shared++;
          link_last_vc[t][d] = v & r;
        end
        link_stall_q[t][d] = v & ~r;
      end
    if (dut.gen_y[0].gen_x[0].i_tile.i_wide_router.gen_switch[0].i_switch.lock_q != '0 ||
        dut.gen_y[0].gen_x[0].i_tile.i_wide_router.gen_switch[1].i_switch.lock_q != '0) n_locked++;
    for (int t = 0; t < nt; t++) begin
      w_took[t] = w_iv[t] & w_ir[t];
      prev_ready[t] = w_ir[t];
    end
    q_took = q_iv & q_ir;
    s_took = s_iv & s_ir;
    @(posedge clk);
    cycle_no++;
    @(negedge clk);
    for (int t = 0; t < nt; t++) begin
      for (int v = 0; v < nvc; v++) if (w_took[t][v]) void'(wq[t][v].pop_front());
      if (q_took[t]) void'(qq[t].pop_front());
      if (s_took[t]) void'(sq[t].pop_front());
    end
  endtask

  task automatic wait_idle(input int max_cycles);
    for (int c = 0; c < max_cycles; c++) begin
      if (wide_rx_total == wide_tx_total && narrow_rx_total == narrow_tx_total) break;
      cycle();
    end
    check(wide_rx_total == wide_tx_total && narrow_rx_total == narrow_tx_total, "network drained");
  endtask

  // Binary-tree broadcast of nbeats beats on VC v; returns total cycles.
  task automatic broadcast(input int nbeats, input int v, output longint total);
    longint t0;
    t0 = cycle_no;
    for (int r = 0; r < 4; r++) begin
      int stride, rx_before, c;
      longint r0;
      stride = 8 >> r;             // holders are multiples of 2*stride
      r0 = cycle_no;
      rx_before = wide_rx_total;
      for (int h = 0; h < NT; h += 2 * stride) send_wide(h, h + stride, v, nbeats);
      c = 0;
      while (wide_rx_total != wide_tx_total && c < 4 * nbeats + 200) begin
        cycle();
        c++;
      end
      check(wide_rx_total == wide_tx_total, "broadcast round completed");
      // Full rate: beats plus at most a few cycles per hop of latency.
      check(cycle_no - r0 <= longint'(nbeats) + 64'd24, "broadcast round at full link rate");
    end
    total = cycle_no - t0;
  endtask

  initial begin
    longint runtime;
    rand_eject = 0;
    for (int t = 0; t < nt; t++) begin
      w_iv[t] = '0; w_id[t] = '0; w_or[t] = '1; q_id[t] = '0; s_id[t] = '0;
      prev_ready[t] = '1; eject_ready[t] = '1;
      rx_count[t] = '{0, 0};
      for (int d = 0; d < nlinks; d++) begin link_stall_q[t][d] = '0; link_last_vc[t][d] = '0; end
      for (int u = 0; u < nt; u++) begin
        wseq_tx[t][u] = '{0, 0}; wseq_rx[t][u] = '{0, 0};
        for (int p = 0; p < 2; p++) begin nseq_tx[p][t][u] = 0; nseq_rx[p][t][u] = 0; end
      end
    end
    q_iv = '0; s_iv = '0; q_or = '1; s_or = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // Phase A: broadcast sweep.
    for (int v = 0; v < nvc; v++)
      for (int kb = 1; kb <= 32; kb *= 2) begin
        broadcast(kb * 1024 / BeatBytes, v, runtime);
        $display("broadcast %0d B on VC %0d (%s data): %0d cycles", kb * 1024, v, v == 0 ? "write" : "read", runtime);
      end

    // Phase B: endpoint deadlock scenario at tile 0.
    eject_ready[0] = 2'b10;                 // write data to tile 0's memory held
    send_wide(3, 0, VcWideW, 200);          // external initiator writes to tile 0
    send_wide(2, 0, VcWideR, 300);          // remote memory returns read data
    repeat (40) cycle();
    begin
      int r0, w0;
      r0 = rx_count[0][1]; w0 = rx_count[0][0];
      repeat (100) cycle();
      check(rx_count[0][0] == w0, "held write VC delivers nothing");
      check(rx_count[0][1] - r0 == 100, "read data streams at full rate past held writes");
      $display("deadlock scenario: %0d read beats in 100 cycles while writes held", rx_count[0][1] - r0);
    end
    eject_ready[0] = 2'b11;
    wait_idle(2000);

    // Phase C: random traffic on every plane.
    rand_eject = 1;
    for (int c = 0; c < 600; c++) begin
      for (int t = 0; t < nt; t++) begin
        if ($urandom_range(0, 60) == 0) send_wide(t, $urandom_range(0, NT - 1), $urandom_range(0, 1), $urandom_range(1, 8));
        if ($urandom_range(0, 10) == 0) send_narrow(0, t, $urandom_range(0, NT - 1));
        if ($urandom_range(0, 10) == 0) send_narrow(1, t, $urandom_range(0, NT - 1));
      end
      cycle();
    end
    rand_eject = 0;
    for (int t = 0; t < nt; t++) eject_ready[t] = '1;
    wait_idle(5000);

    $display("mechanisms: preemptions=%0d stalled_vc_cycles=%0d vc_switches_on_link=%0d tile0_burst_lock_cycles=%0d narrow_flits=%0d",
             n_preempt, n_stall, n_shared, n_locked, narrow_rx_total);
    check(n_preempt > 0, "preemption happened");
    check(n_stall > 0, "VC stall happened");
    check(n_shared > 0, "two VCs shared a link");
    check(n_locked > 0, "burst lock held");
    check(narrow_rx_total > 0, "narrow planes carried traffic");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
