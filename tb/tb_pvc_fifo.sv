// tb_pvc_fifo: self-checking test of the flit buffer.
// Random pushes and pops against a queue model; checks data order, the
// "not full" ready, and the one-cycle write-to-read latency.
module tb_pvc_fifo;
  localparam int unsigned W = 16, D = 2;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  always #5 clk = ~clk;

  pvc_fifo #(.Width(W), .Depth(D)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Latency: push into empty buffer, visible the next cycle, not before.
    @(negedge clk);
    in_valid = 1; in_data = 16'hABCD;
    #1 check(!out_valid, "output valid in the push cycle (fall-through)");
    @(negedge clk);
    in_valid = 0;
    check(out_valid && out_data == 16'hABCD, "one-cycle latency");
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    check(!out_valid, "empty after pop");
    // Fill: ready drops after Depth entries.
    for (int i = 0; i < D; i++) begin
      check(in_ready, "ready while not full");
      in_valid = 1; in_data = W'(i);
      @(negedge clk);
    end
    in_valid = 0;
    check(!in_ready, "not ready when full");
    for (int i = 0; i < D; i++) begin
      check(out_valid && out_data == W'(i), "drain order");
      out_ready = 1; @(negedge clk); out_ready = 0;
    end
    // Random traffic against the model.
    for (int c = 0; c < 3000; c++) begin
      in_valid  = $urandom_range(0, 3) != 0;
      in_data   = W'($urandom);
      out_ready = $urandom_range(0, 2) != 0;
      #1;
      check(in_ready == (model.size() < D), "ready equals not full");
      check(out_valid == (model.size() > 0), "valid equals not empty");
      if (out_valid && model.size() > 0)
        check(out_data == model[0], "data order");
      begin
        bit do_push, do_pop;
        do_push = in_valid && (model.size() < D);
        do_pop  = out_ready && (model.size() > 0);
        @(posedge clk);
        if (do_pop) void'(model.pop_front());
        if (do_push) model.push_back(in_data);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
