// tb_pvc_switch: self-checking test of one VC's crossbar with switch
// allocation. Five random sources send bursts of 1..4 flits to random
// outputs; five sinks apply random backpressure. Checks: every flit reaches
// the output it asked for, per source-output order, no interleaving of two
// bursts on one output, all flits delivered, single-cycle traversal.
// Flit layout: [15:13] source, [12:10] output, [9:1] sequence, [0] last.
module tb_pvc_switch;
  localparam int unsigned N = 5, FW = 16;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [FW-1:0] in_data [N];
  logic [N-1:0]  in_route [N];
  logic [FW-1:0] out_data [N];
  int checks = 0, failures = 0;
  logic [FW-1:0] exp_q [N][N][$];   // [src][out]
  int lock_src [N];
  int sent = 0, recvd = 0;
  int burst_left [N];
  int cur_out [N];
  int seq [N];
  int bursts_contended = 0;

  always #5 clk = ~clk;

  pvc_switch #(.NumIn(N), .NumOut(N), .FlitW(FW), .LastBit(0)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data), .in_route_i(in_route),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Build the next flit of source i.
  function automatic logic [FW-1:0] mk(input int i);
    return {3'(i), 3'(cur_out[i]), 9'(seq[i]), burst_left[i] == 1};
  endfunction

  initial begin
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < N; i++) begin
      in_data[i] = '0; in_route[i] = '0; lock_src[i] = -1; burst_left[i] = 0; seq[i] = 0; cur_out[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Single-cycle traversal: one flit from input 2 to output 4.
    out_ready = '1;
    in_valid[2] = 1; in_route[2] = 5'b10000; in_data[2] = {3'd2, 3'd4, 9'd0, 1'b1};
    #1 check(out_valid[4] && out_data[4] == in_data[2] && in_ready[2], "same-cycle traversal");
    @(negedge clk);
    in_valid = '0;
    // Random traffic.
    for (int c = 0; c < 6000; c++) begin
      for (int i = 0; i < N; i++) begin
        if (!in_valid[i] && c < 5500 && $urandom_range(0, 3) != 0) begin
          if (burst_left[i] == 0) begin
            burst_left[i] = $urandom_range(1, 4);
            cur_out[i] = $urandom_range(0, N - 1);
          end
          in_valid[i] = 1;
          in_data[i]  = mk(i);
          in_route[i] = N'(1) << cur_out[i];
          exp_q[i][cur_out[i]].push_back(in_data[i]);
          seq[i]++;
          sent++;
        end
      end
      out_ready = N'($urandom);
      #1;
      for (int o = 0; o < N; o++) begin
        int reqs;
        reqs = 0;
        for (int i = 0; i < N; i++) if (in_valid[i] && in_route[i][o]) reqs++;
        if (reqs > 1) bursts_contended++;
      end
      for (int o = 0; o < N; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          int s;
          s = int'(out_data[o][15:13]);
          check(int'(out_data[o][12:10]) == o, "flit left through requested output");
          check(exp_q[s][o].size() > 0 && out_data[o] == exp_q[s][o][0], "per source-output order");
          if (exp_q[s][o].size() > 0) void'(exp_q[s][o].pop_front());
          check(lock_src[o] == -1 || lock_src[o] == s, "no burst interleaving");
          lock_src[o] = out_data[o][0] ? -1 : s;
          recvd++;
        end
      end
      begin
        logic [N-1:0] took;
        took = in_valid & in_ready;
        @(posedge clk);
        #1;
        for (int i = 0; i < N; i++)
          if (took[i]) begin
          in_valid[i] = 0;
            burst_left[i]--;
          end
      end
      @(negedge clk);
    end
    check(recvd == sent, "all flits delivered");
    check(bursts_contended > 100, "output contention exercised");
    $display("sent=%0d received=%0d contended_cycles=%0d", sent, recvd, bursts_contended);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
