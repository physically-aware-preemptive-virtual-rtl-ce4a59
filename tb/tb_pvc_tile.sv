// tb_pvc_tile: self-checking test of one tile's three routers at full
// width (512-bit wide plane, 64-bit narrow planes). Tile at (1, 2).
// Streams run at the same time on all planes:
//   wide VC 0 (write data)  West  -> East   (dst (3,2))
//   wide VC 1 (read data)   North -> Eject  (dst (1,2))
//   narrow request          Eject -> South  (dst (1,0))
//   narrow response         East  -> West   (dst (0,2))
// The response plane's West receiver is stalled for a while: the other
// planes must not notice. Checks routing, payload integrity, order,
// completeness and full rate on the wide plane.
module tb_pvc_tile;
  import pvc_pkg::*;
  localparam int unsigned WF = WideDataW + HdrW, NF = NarrowDataW + HdrW;
  localparam int unsigned P = NumDirs, NBEATS = 64;
  logic clk = 0, rst_n = 0;
  coord_t id;
  logic [1:0]    w_iv [P], w_ir [P], w_ov [P], w_or [P];
  logic [WF-1:0] w_id [P], w_od [P];
  logic [0:0]    q_iv [P], q_ir [P], q_ov [P], q_or [P];
  logic [NF-1:0] q_id [P], q_od [P];
  logic [0:0]    s_iv [P], s_ir [P], s_ov [P], s_or [P];
  logic [NF-1:0] s_id [P], s_od [P];
  int checks = 0, failures = 0;
  // Stream state: [0] wide VC0, [1] wide VC1, [2] req, [3] rsp.
  int tx [4], rx [4], rx_cycles [4];
  int stray = 0;

  always #5 clk = ~clk;

  pvc_tile dut (
    .clk_i(clk), .rst_ni(rst_n), .id_i(id),
    .wide_in_valid_i(w_iv), .wide_in_ready_o(w_ir), .wide_in_data_i(w_id),
    .wide_out_valid_o(w_ov), .wide_out_ready_i(w_or), .wide_out_data_o(w_od),
    .req_in_valid_i(q_iv), .req_in_ready_o(q_ir), .req_in_data_i(q_id),
    .req_out_valid_o(q_ov), .req_out_ready_i(q_or), .req_out_data_o(q_od),
    .rsp_in_valid_i(s_iv), .rsp_in_ready_o(s_ir), .rsp_in_data_i(s_id),
    .rsp_out_valid_o(s_ov), .rsp_out_ready_i(s_or), .rsp_out_data_o(s_od));

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

  function automatic hdr_t mkhdr(input int dx, input int dy, input bit last);
    hdr_t h;
    h.src = id;
    h.dst.x = CoordW'(dx); h.dst.y = CoordW'(dy);
    h.last = last;
    return h;
  endfunction

  // Payload of beat k of stream s: a pattern spread over all 512 bits.
  function automatic logic [WideDataW-1:0] wpay(input int s, input int k);
    logic [WideDataW-1:0] d;
    for (int j = 0; j < WideDataW / 32; j++) d[j*32 +: 32] = 32'(s * 1000003 + k * 7919 + j * 104729);
    return d;
  endfunction

  initial begin
    bit rsp_stall;
    id.x = 1; id.y = 2;
    for (int p = 0; p < P; p++) begin
      w_iv[p] = '0; w_id[p] = '0; w_or[p] = '1;
      q_iv[p] = '0; q_id[p] = '0; q_or[p] = '1;
      s_iv[p] = '0; s_id[p] = '0; s_or[p] = '1;
    end
    tx = '{0, 0, 0, 0}; rx = '{0, 0, 0, 0}; rx_cycles = '{0, 0, 0, 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int c = 0; c < 200; c++) begin
      logic [3:0] took;
      rsp_stall = (c >= 20 && c < 60);
      // Senders.
      w_iv[West]  = (tx[0] < NBEATS) ? 2'b01 : 2'b00;
      w_id[West]  = {wpay(0, tx[0]), mkhdr(3, 2, tx[0] == NBEATS - 1)};
      w_iv[North] = (tx[1] < NBEATS) ? 2'b10 : 2'b00;
      w_id[North] = {wpay(1, tx[1]), mkhdr(1, 2, tx[1] == NBEATS - 1)};
      q_iv[Eject] = (tx[2] < NBEATS);
      q_id[Eject] = {64'(tx[2]) ^ 64'h5555_0000_0000_0000, mkhdr(1, 0, 1'b1)};
      s_iv[East]  = (tx[3] < NBEATS);
      s_id[East]  = {64'(tx[3]) ^ 64'hAAAA_0000_0000_0000, mkhdr(0, 2, 1'b1)};
      s_or[West]  = !rsp_stall;
      #1;
      // Receivers.
      for (int o = 0; o < P; o++) begin
        if (w_ov[o] != 0 && (w_ov[o] & w_or[o]) != 0) begin
          if (o == East && w_ov[o] == 2'b01) begin
            check(w_od[o] == {wpay(0, rx[0]), mkhdr(3, 2, rx[0] == NBEATS - 1)}, "wide VC0 beat");
            rx[0]++; rx_cycles[0]++;
          end else if (o == Eject && w_ov[o] == 2'b10) begin
            check(w_od[o] == {wpay(1, rx[1]), mkhdr(1, 2, rx[1] == NBEATS - 1)}, "wide VC1 beat");
            rx[1]++;
            if (rsp_stall) rx_cycles[1]++;
          end else stray++;
        end
        if (q_ov[o] && q_or[o]) begin
          if (o == South) begin
            check(q_od[o] == {64'(rx[2]) ^ 64'h5555_0000_0000_0000, mkhdr(1, 0, 1'b1)}, "request flit");
            rx[2]++;
          end else stray++;
        end
        if (s_ov[o] && s_or[o]) begin
          if (o == West) begin
            check(!rsp_stall, "response moves only when ready");
            check(s_od[o] == {64'(rx[3]) ^ 64'hAAAA_0000_0000_0000, mkhdr(0, 2, 1'b1)}, "response flit");
            rx[3]++;
          end else stray++;
        end
      end
      took = {s_iv[East] && s_ir[East], q_iv[Eject] && q_ir[Eject],
              (w_iv[North] & w_ir[North]) != 0, (w_iv[West] & w_ir[West]) != 0};
      @(posedge clk);
      @(negedge clk);
      for (int s = 0; s < 4; s++) if (took[s]) tx[s]++;
    end
    check(stray == 0, "no flit left through a wrong port");
    for (int s = 0; s < 4; s++) check(rx[s] == NBEATS, "stream complete");
    check(rx_cycles[1] == 40, "wide read data at full rate while response plane stalled");
    $display("received: %0d %0d %0d %0d, wide beats during stall=%0d", rx[0], rx[1], rx[2], rx[3], rx_cycles[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
