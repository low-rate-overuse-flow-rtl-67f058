// tb_loft_full: one complete operation of the detector at its default sizes
// (16384 counters, 16 minor cycles of 3,125,000 clocks, 2**18-slot flow
// table, 64 monitored flows, lambda = 2.1e6/s at 200 MHz).
// 2000 background flows send 100-byte packets at just under their permitted
// rate gamma = 0.05 byte/clock (beta = 1500 bytes) and one flow sends at
// 1.5 times that rate; a packet arrives in every clock. After the first major
// cycle (50 M clocks) the estimate must find all 2001 flows active, publish a
// full watchlist headed by the 1.5x flow within the major cycle, and precise
// monitoring must then report that flow (and only it) and blacklist it.
module tb_loft_full;
  import loft_pkg::*;
  localparam logic [31:0] BAD = 32'd4242;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  pkt_t in_pkt = '0;
  logic fwd_valid, det_valid, wl_valid;
  pkt_t fwd_pkt;
  logic [FLOW_W-1:0] det_flow;
  logic [FLOW_W-1:0] wl_id [64];
  logic [63:0] wl_vld, watched;
  logic [31:0] n_active;
  logic [63:0] wl_score [64];
  logic [15:0] major_j;
  logic [7:0]  bl_count;
  loft_events_t ev;
  int checks = 0, failures = 0;
  int n_minor = 0, n_major = 0, n_det = 0, n_drop = 0, n_wl = 0;
  longint t_start = 0, t_done = 0, t_det = 0, clk_n = 0;

  loft_top dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s t=%0t", msg, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    clk_n++;
    if (ev.minor_tick) n_minor++;
    if (ev.major_tick) n_major++;
    if (ev.bl_drop) n_drop++;
    if (ev.est_start) t_start = clk_n;
    if (ev.est_overrun || ev.upd_overrun) chk(0, "overrun");
    if (wl_valid) begin
      n_wl++;
      t_done = clk_n;
      $display("watchlist after %0d clocks of estimation, %0d active flows, head %0d", t_done - t_start, n_active, wl_id[0]);
      chk(n_active == 2001, "all flows found active");
      chk(wl_vld == '1, "full watchlist");
      chk(wl_id[0] == BAD, "1.5x flow heads the watchlist");
      for (int i = 1; i < 64; i++) chk(wl_score[i-1] >= wl_score[i], "watchlist sorted by score");
    end
    if (det_valid) begin
      n_det++;
      t_det = clk_n;
      chk(det_flow == BAD, "only the 1.5x flow is reported");
    end
  end

  initial begin
    longint c;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (in_ready);
    @(negedge clk);
    in_valid = 1;
    in_pkt.size = 100; in_pkt.gamma = 32'd838861; in_pkt.beta = 1500;   // 0.05 B/clock
    // period of 4003 clocks: every background flow twice, the 1.5x flow three times
    c = 0;
    while (n_wl == 0 || (n_det == 0 && clk_n < t_done + 400000)) begin
      int s;
      s = int'(c % 4003);
      in_pkt.flow_id = (s < 4000) ? 32'd1000 + 32'(s % 2000) : BAD;
      @(negedge clk);
      c++;
    end
    // keep the same traffic for two more periods: the 1.5x flow is now dropped
    repeat (8006) begin
      int s;
      s = int'(c % 4003);
      in_pkt.flow_id = (s < 4000) ? 32'd1000 + 32'(s % 2000) : BAD;
      @(negedge clk);
      c++;
    end
    in_valid = 0;
    repeat (5) @(negedge clk);
    $display("minor=%0d major=%0d detections=%0d drops=%0d det_after=%0d clocks", n_minor, n_major, n_det, n_drop, t_det - t_done);
    chk(n_major == 1 && n_minor >= 16 && n_minor < 32, "first major cycle made of 16 minor cycles");
    chk(t_done > t_start && t_done - t_start < 50000000, "estimate inside one major cycle");
    chk(n_det == 1, "1.5x flow detected once");
    chk(n_drop >= 6, "its packets are dropped afterwards (3 per 4003 clocks)");
    chk(bl_count == 1, "blacklist holds exactly the 1.5x flow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (70000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
