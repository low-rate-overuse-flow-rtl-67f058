// tb_loft_workload: the half-utilisation sensitivity workload at reduced size.
//
// Scenario, following the evaluation's streaming-traffic setting: half of the
// compliant flows send up to their specification, the other half send 25 times
// less, and overuse flows are injected. Here: 100 full-rate flows and 100
// light flows, all with gamma = 0.25 byte/clock and beta = 1500 bytes, plus one
// 2-fold and one 1.5-fold overuse flow, in 100-byte packets on a repeating
// 400-clock schedule (every flow keeps its slot, so compliant buckets never
// fill). The detector runs with 1024 counters (the smallest counter array of
// the evaluation), 4 minor cycles of 10,000 clocks per major cycle, a reset
// every 2 major cycles, a 1024-slot table, 8 monitored flows and one sampling
// instant per 20 clocks. These sizes are this testbench's choice, to keep the
// run short; the traffic mix is the evaluation's.
// Checks: both overuse flows are reported within 8 major cycles and then
// dropped; no compliant flow is ever reported or dropped; the estimate never
// overruns; the 2-fold flow reaches a watchlist (after its detection it is
// blacklisted, so it is no longer sampled).
module tb_loft_workload;
  import loft_pkg::*;
  localparam int unsigned WFM = 8;
  localparam int unsigned P   = 400;
  localparam logic [31:0] BAD2  = 32'd900002;
  localparam logic [31:0] BAD15 = 32'd900015;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  pkt_t in_pkt = '0;
  logic fwd_valid, det_valid, wl_valid;
  pkt_t fwd_pkt;
  logic [FLOW_W-1:0] det_flow;
  logic [FLOW_W-1:0] wl_id [WFM];
  logic [WFM-1:0] wl_vld, watched;
  logic [31:0] n_active;
  logic [63:0] wl_score [WFM];
  logic [15:0] major_j;
  logic [7:0]  bl_count;
  loft_events_t ev;
  int checks = 0, failures = 0;
  int n_major = 0, n_wl = 0, n_wl_bad2 = 0, n_reset = 0;
  int det2_at = -1, det15_at = -1, drop2 = 0, drop15 = 0, drop_other = 0;

  loft_top #(.IDX_W(10), .Z(4), .CLK_PER_MINOR(10000), .THETA_RESET(8), .TAB_W(10), .MAX_PROBE(16),
             .WFM(WFM), .SAMPLE_RATE(64'd10000000), .CLK_HZ(64'd200000000)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ev.major_tick) n_major++;
    if (ev.reset_tick) n_reset++;
    if (ev.est_overrun || ev.upd_overrun) chk(0, "no overrun");
    if (ev.bl_drop) begin
      if (in_pkt.flow_id == BAD2) drop2++;
      else if (in_pkt.flow_id == BAD15) drop15++;
      else drop_other++;
    end
    if (wl_valid) begin
      automatic logic seen = 0;
      n_wl++;
      for (int i = 0; i < WFM; i++) if (wl_vld[i] && wl_id[i] == BAD2) seen = 1;
      if (seen) n_wl_bad2++;
    end
    if (det_valid) begin
      chk(det_flow == BAD2 || det_flow == BAD15, "only overuse flows are reported");
      if (det_flow == BAD2)  begin chk(det2_at < 0, "2-fold flow reported once");   det2_at  = n_major; end
      if (det_flow == BAD15) begin chk(det15_at < 0, "1.5-fold flow reported once"); det15_at = n_major; end
    end
  end

  initial begin
    int c, p, s;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (in_ready);
    for (c = 0; c < 8 * 4 * 10000; c++) begin
      @(negedge clk);
      p = c / P; s = c % P;
      in_valid = 1;
      in_pkt.size = 100; in_pkt.gamma = 32'd4194304; in_pkt.beta = 1500;   // 0.25 B/clock
      if (s < 100)                                in_pkt.flow_id = 32'd1000 + 32'(s);
      else if (s == 100 || s == 300)              in_pkt.flow_id = BAD2;
      else if (s == 110 || (s == 310 && p % 2 == 1))   in_pkt.flow_id = BAD15;
      else if (s >= 120 && s < 124)               in_pkt.flow_id = 32'd2000 + 32'((p % 25) * 4 + (s - 120));
      else in_valid = 0;
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    $display("major=%0d resets=%0d watchlists=%0d (2-fold flow on %0d) detected: 2-fold after major %0d, 1.5-fold after major %0d; drops %0d/%0d/%0d",
             n_major, n_reset, n_wl, n_wl_bad2, det2_at, det15_at, drop2, drop15, drop_other);
    chk(n_major >= 7 && n_reset >= 3, "major and reset cycles ran");
    chk(n_wl >= 6, "one watchlist per major cycle");
    chk(n_wl_bad2 >= 1, "2-fold flow on a watchlist before its detection");
    chk(det2_at >= 0, "2-fold flow detected");
    chk(det15_at >= 0, "1.5-fold flow detected");
    chk(drop2 > 0 && drop15 > 0, "overuse flows dropped after detection");
    chk(drop_other == 0, "no compliant packet dropped");
    chk(bl_count == 2, "blacklist holds the two overuse flows");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (2000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
