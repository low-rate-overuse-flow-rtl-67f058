// tb_loft_top: end-to-end run of the detector at reduced sizes (32 counters,
// Z = 4 minor cycles of 3000 clocks, a 128-slot flow table with a probe limit
// of 2, 4 monitored flows, 8 blacklist entries, a reset cycle of 3 major
// cycles, one sampling instant per 8 clocks).
// Traffic, in every 50 clocks: 40 background flows send one 100-byte packet
// each, exactly their permitted rate gamma = 2 bytes/clock (beta = 3000);
// one flow sends three such packets (3x overuse); one short-lived flow with a
// fresh ID sends a single packet. Checks: every packet of a flow not yet
// blacklisted is forwarded unchanged one clock later and every packet of a
// blacklisted flow is dropped; the overuse flow reaches the watchlist, is
// detected and blacklisted; no background flow is ever reported; the estimate
// always finishes inside its major cycle. Every mechanism (minor/major/reset
// cycles, bypass, sampling, flow-table insert / re-mark / probe-limit miss,
// estimate runs, detection, blacklist drop) must occur at least once.
module tb_loft_top;
  import loft_pkg::*;
  localparam int unsigned WFM = 4;
  localparam logic [31:0] BAD = 32'd7777;
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
  logic [3:0]  bl_count;
  loft_events_t ev;
  int checks = 0, failures = 0;
  int cnt [15];
  string names [15] = '{"minor_tick", "major_tick", "reset_tick", "bl_drop", "bypass", "saturated",
                        "upd_overrun", "sampled", "ins_new", "ins_dup", "ins_miss", "est_start",
                        "est_done", "est_overrun", "detect"};
  logic [31:0] bl_model [$];
  logic exp_fwd = 0;
  pkt_t exp_pkt;
  int wl_bad = 0, det_bad_at = -1;

  loft_top #(.IDX_W(5), .Z(4), .CLK_PER_MINOR(3000), .THETA_RESET(12), .TAB_W(7), .MAX_PROBE(2),
             .WFM(WFM), .BL_N(8), .SAMPLE_RATE(64'd25000000), .CLK_HZ(64'd200000000)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s t=%0t", msg, $time); end
  endtask

  function automatic logic listed(input logic [31:0] f);
    foreach (bl_model[i]) if (bl_model[i] == f) return 1'b1;
    return 1'b0;
  endfunction

  always @(posedge clk) if (rst_n) begin
    logic [14:0] e;
    e = ev;
    for (int i = 0; i < 15; i++) if (e[14 - i]) cnt[i]++;
    // forwarding / blacklist
    chk(fwd_valid == exp_fwd && (!exp_fwd || fwd_pkt == exp_pkt), "forwarding");
    exp_fwd <= in_valid && in_ready && !listed(in_pkt.flow_id);
    exp_pkt <= in_pkt;
    if (in_valid && in_ready) chk(ev.bl_drop == listed(in_pkt.flow_id), "blacklist drop");
    if (det_valid) begin
      chk(det_flow == BAD, "only the overuse flow is reported");
      if (det_bad_at < 0) det_bad_at = cnt[1];
      bl_model.push_back(det_flow);
    end
    if (wl_valid) for (int i = 0; i < WFM; i++) if (wl_vld[i] && wl_id[i] == BAD) wl_bad++;
  end

  initial begin
    int c;
    for (int i = 0; i < 15; i++) cnt[i] = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    wait (in_ready);
    for (c = 0; c < 12 * 4 * 3000; c++) begin
      @(negedge clk);
      in_valid = 1;
      in_pkt.size = 100; in_pkt.gamma = 32'd2 << RATE_FRAC; in_pkt.beta = 3000;
      if (c % 50 < 40)                                    in_pkt.flow_id = 32'd1000 + c % 50;
      else if (c % 50 == 40 || c % 50 == 43 || c % 50 == 46) in_pkt.flow_id = BAD;
      else if (c % 50 == 41) begin in_pkt.flow_id = 32'd100000 + c; in_pkt.gamma = '1; end
      else in_valid = 0;
    end
    @(negedge clk); in_valid = 0;
    repeat (5) @(negedge clk);
    for (int i = 0; i < 15; i++) $display("%-12s %0d", names[i], cnt[i]);
    $display("overuse flow on watchlist %0d times, detected after major cycle %0d", wl_bad, det_bad_at);
    for (int i = 0; i < 15; i++)
      if (names[i] != "saturated" && names[i] != "upd_overrun" && names[i] != "est_overrun")
        chk(cnt[i] > 0, {"mechanism never happened: ", names[i]});
    chk(cnt[5] == 0 && cnt[6] == 0 && cnt[13] == 0, "no saturation or overrun");
    chk(wl_bad > 0, "overuse flow reached the watchlist");
    chk(det_bad_at >= 0, "overuse flow detected");
    chk(cnt[12] >= 10, "one estimate per major cycle");
    chk(bl_count >= 1 && bl_count <= 8, "blacklist holds the detected flow(s)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
