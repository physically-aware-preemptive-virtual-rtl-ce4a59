// tb_pvc_rr_arbiter: self-checking test of the round-robin arbiter.
// A reference pointer model predicts every grant under random requests
// and random advance; also checks that a constant full request is served
// in strict rotation.
module tb_pvc_rr_arbiter;
  localparam int unsigned N = 4;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt;
  logic advance;
  logic [1:0] idx;
  int checks = 0, failures = 0;
  int ptr;

  always #5 clk = ~clk;

  pvc_rr_arbiter #(.N(N)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .advance_i(advance),
    .gnt_o(gnt), .idx_o(idx));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s req=%b gnt=%b ptr=%0d", msg, req, gnt, ptr); end
  endtask

  function automatic logic [N-1:0] expect_gnt(input logic [N-1:0] r, input int p);
    for (int k = 0; k < N; k++) if (r[(p + k) % N]) return N'(1) << ((p + k) % N);
    return '0;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req = '0; advance = 0; ptr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Full request with advance: 0,1,2,3,0,...
    req = '1; advance = 1;
    for (int i = 0; i < 8; i++) begin
      #1 check(gnt == N'(1) << (i % N) && idx == 2'(i % N), "rotation");
      @(negedge clk);
    end
    ptr = 0;
    for (int i = 0; i < 8; i++) ptr = (ptr + 1) % N;
    for (int c = 0; c < 4000; c++) begin
      req = N'($urandom);
      advance = $urandom_range(0, 1);
      #1;
      check(gnt == expect_gnt(req, ptr), "grant");
      if (gnt != 0) check(idx == 2'($clog2(gnt)), "index");
      @(posedge clk);
      if (advance && req != 0)
        for (int k = 0; k < N; k++) if (req[(ptr + k) % N]) begin ptr = (ptr + k + 1) % N; break; end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
