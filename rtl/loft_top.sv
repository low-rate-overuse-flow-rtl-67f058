// loft_top: overuse-flow policing with the LOFT probabilistic detector.
//
// Packet path (one packet per clock, after the classifier): the blacklist
// drops packets of flows already found overusing; every other packet is
// forwarded (fwd_*, one clock later) and is seen by
//   - loft_update   adds its size to counter H_{j,k}(flow) of the fast-memory
//                   counter array of the current minor cycle,
//   - loft_sampler  samples it at random instants (rate lambda) into the
//                   active-flow list kept in loft_flow_table,
//   - loft_monitor  leaky-bucket check if the flow is on the watchlist.
// At each minor-cycle end the counter array is streamed into
// loft_counter_store. When the last array of a major cycle has arrived, the
// estimate engine (loft_estimate) runs over the flow table and the stored
// arrays and produces the watchlist of the W_fm flows with the largest
// (|J|/j)*(A/C); the watchlist is loaded into the monitor for the next major
// cycle. A flow the monitor finds violating gamma*t + beta is reported
// (det_*) and added to the blacklist. loft_cycle_timer provides minor, major
// and reset cycles; at a reset cycle the estimate clears the flow table after
// its run.
//
// The classifier and the network interfaces are outside: in_pkt carries the
// flow ID, the length and the flow's gamma and beta. in_ready is low only
// while the fast-memory counters are cleared after reset.
// Defaults are the paper's main configuration (16384 counters, 64 minor and
// 4 major cycles per second at 200 MHz, lambda = 2.1e6/s, 64 monitored flows,
// a 15 s reset cycle); table size, probe limit and blacklist size are this
// design's choices.
//
// Lint: only bit 0 of d_jg (the bank parity) is used by the counter store.
// rst_n is an asynchronous reset everywhere; the sampler's handshake assertion
// also uses it as its disable condition, which lint reports as a synchronous use
// (SYNCASYNCNET); the assertion is not part of the circuit.
module loft_top
  import loft_pkg::*;
#(
  parameter int unsigned     IDX_W         = 14,
  parameter int unsigned     Z             = 16,
  parameter int unsigned     CLK_PER_MINOR = 3125000,
  parameter int unsigned     THETA_RESET   = 960,
  parameter int unsigned     TAB_W         = 18,
  parameter int unsigned     MAX_PROBE     = 16,
  parameter int unsigned     WFM           = 64,
  parameter int unsigned     BL_N          = 128,
  parameter longint unsigned SAMPLE_RATE   = 64'd2100000,
  parameter longint unsigned CLK_HZ        = 64'd200000000,
  parameter int unsigned     CW            = CTR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  pkt_t              in_pkt,
  output logic              in_ready,
  output logic              fwd_valid,
  output pkt_t              fwd_pkt,
  output logic              det_valid,
  output logic [FLOW_W-1:0] det_flow,
  output logic              wl_valid,
  output logic [FLOW_W-1:0] wl_id [WFM],
  output logic [WFM-1:0]    wl_vld,
  output logic [63:0]       wl_score [WFM],
  output logic [15:0]       major_j,
  output logic [$clog2(BL_N):0] bl_count,
  output logic [WFM-1:0]    watched,
  output logic [31:0]       n_active,
  output loft_events_t      ev
);
  localparam int unsigned A_W  = 64;
  localparam int unsigned C_W  = 48;
  localparam int unsigned NJ_W = 16;
  localparam int unsigned S_W  = 64;

  // ---------------- cycle timer ----------------
  logic [15:0]       k, jg, ended_j, ended_jg;
  logic              minor_tick, major_tick, reset_tick;
  logic [TIME_W-1:0] now;
  loft_cycle_timer #(.CLK_PER_MINOR(CLK_PER_MINOR), .Z(Z), .THETA_RESET(THETA_RESET)) u_timer (
    .clk, .rst_n, .k, .j(major_j), .jg, .ended_j, .ended_jg,
    .minor_tick, .major_tick, .reset_tick, .now
  );

  // ---------------- blacklist ----------------
  logic bl_hit, pass;
  loft_blacklist #(.N(BL_N)) u_bl (
    .clk, .rst_n,
    .lookup_flow (in_pkt.flow_id),
    .hit         (bl_hit),
    .ins_valid   (det_valid),
    .ins_flow    (det_flow),
    .count       (bl_count)
  );
  assign pass = in_valid && in_ready && !bl_hit;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fwd_valid <= 1'b0;
      fwd_pkt   <= '0;
    end else begin
      fwd_valid <= pass;
      if (pass) fwd_pkt <= in_pkt;
    end
  end

  // ---------------- update (fast path) ----------------
  logic             d_valid, d_last, upd_ready;
  logic [IDX_W-1:0] d_idx;
  logic [CW-1:0]    d_data;
  logic [15:0]      d_k, d_jg;
  logic             bypass, saturated, upd_overrun;
  loft_update #(.IDX_W(IDX_W), .CW(CW)) u_update (
    .clk, .rst_n,
    .in_valid    (pass),
    .in_flow     (in_pkt.flow_id),
    .in_size     (in_pkt.size),
    .in_ready    (upd_ready),
    .minor_tick, .k, .jg,
    .drain_valid (d_valid),
    .drain_idx   (d_idx),
    .drain_data  (d_data),
    .drain_k     (d_k),
    .drain_jg    (d_jg),
    .drain_last  (d_last),
    .bypass, .saturated,
    .overrun     (upd_overrun)
  );
  assign in_ready = upd_ready;

  // ---------------- sampler and flow table ----------------
  logic              s_valid, s_ready;
  logic [FLOW_W-1:0] s_flow;
  loft_sampler #(.SAMPLE_RATE(SAMPLE_RATE), .CLK_HZ(CLK_HZ)) u_sampler (
    .clk, .rst_n,
    .in_valid  (pass),
    .in_flow   (in_pkt.flow_id),
    .out_valid (s_valid),
    .out_flow  (s_flow),
    .out_ready (s_ready)
  );

  logic              ft_rd_en, ft_rd_valid, ft_wr_en, ft_wr_clr, ft_wr_clr_par;
  logic              ft_clr_en, ft_clr_keep_par, ft_pause;
  logic [TAB_W-1:0]  ft_rd_slot, ft_wr_slot, ft_clr_slot;
  logic [FLOW_W-1:0] ft_rd_id;
  logic [1:0]        ft_rd_act;
  logic [A_W-1:0]    ft_rd_a, ft_wr_a;
  logic [C_W-1:0]    ft_rd_c, ft_wr_c;
  logic [NJ_W-1:0]   ft_rd_nj, ft_wr_nj;
  logic              ins_new, ins_dup, ins_miss;
  loft_flow_table #(.TAB_W(TAB_W), .MAX_PROBE(MAX_PROBE), .A_W(A_W), .C_W(C_W), .NJ_W(NJ_W)) u_ft (
    .clk, .rst_n,
    .ins_valid (s_valid),
    .ins_flow  (s_flow),
    .ins_par   (jg[0]),
    .ins_pause (ft_pause),
    .ins_ready (s_ready),
    .ins_new, .ins_dup, .ins_miss,
    .rd_en     (ft_rd_en),
    .rd_slot   (ft_rd_slot),
    .rd_valid  (ft_rd_valid),
    .rd_id     (ft_rd_id),
    .rd_act    (ft_rd_act),
    .rd_a      (ft_rd_a),
    .rd_c      (ft_rd_c),
    .rd_nj     (ft_rd_nj),
    .wr_en     (ft_wr_en),
    .wr_slot   (ft_wr_slot),
    .wr_a      (ft_wr_a),
    .wr_c      (ft_wr_c),
    .wr_nj     (ft_wr_nj),
    .wr_clr    (ft_wr_clr),
    .wr_clr_par(ft_wr_clr_par),
    .clr_en    (ft_clr_en),
    .clr_slot  (ft_clr_slot),
    .clr_keep_par(ft_clr_keep_par)
  );

  // ---------------- counter store ----------------
  logic             cs_rd_en, cs_rd_bank;
  logic [15:0]      cs_rd_k;
  logic [IDX_W-1:0] cs_rd_idx;
  logic [CW-1:0]    cs_rd_data;
  loft_counter_store #(.IDX_W(IDX_W), .Z(Z), .CW(CW)) u_cs (
    .clk,
    .wr_en   (d_valid),
    .wr_bank (d_jg[0]),
    .wr_k    (d_k),
    .wr_idx  (d_idx),
    .wr_data (d_data),
    .rd_en   (cs_rd_en),
    .rd_bank (cs_rd_bank),
    .rd_k    (cs_rd_k),
    .rd_idx  (cs_rd_idx),
    .rd_data (cs_rd_data)
  );

  // ---------------- estimate ----------------
  logic est_start, est_busy, est_done, est_overrun, reset_pending, arrays_in;
  assign arrays_in   = d_valid && d_last && (d_k == 16'(Z - 1));
  assign est_start   = arrays_in && !est_busy;
  assign est_overrun = arrays_in && est_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)          reset_pending <= 1'b0;
    else if (reset_tick) reset_pending <= 1'b1;
    else if (est_start)  reset_pending <= 1'b0;
  end

  loft_estimate #(.IDX_W(IDX_W), .Z(Z), .TAB_W(TAB_W), .WFM(WFM), .CW(CW),
                  .A_W(A_W), .C_W(C_W), .NJ_W(NJ_W), .S_W(S_W)) u_est (
    .clk, .rst_n,
    .start       (est_start),
    .start_j     (ended_j),
    .start_jg    (ended_jg),
    .start_reset (reset_pending),
    .busy        (est_busy),
    .done        (est_done),
    .ft_rd_en, .ft_rd_slot, .ft_rd_valid, .ft_rd_id, .ft_rd_act, .ft_rd_a, .ft_rd_c, .ft_rd_nj,
    .ft_wr_en, .ft_wr_slot, .ft_wr_a, .ft_wr_c, .ft_wr_nj, .ft_wr_clr, .ft_wr_clr_par,
    .ft_clr_en, .ft_clr_slot, .ft_clr_keep_par, .ft_pause,
    .cs_rd_en, .cs_rd_bank, .cs_rd_k, .cs_rd_idx, .cs_rd_data,
    .wl_valid, .wl_id, .wl_vld, .wl_score, .n_active
  );

  // ---------------- precise monitoring ----------------
  loft_monitor #(.N(WFM)) u_mon (
    .clk, .rst_n, .now,
    .load      (wl_valid),
    .load_id   (wl_id),
    .load_vld  (wl_vld),
    .pkt_valid (pass),
    .pkt       (in_pkt),
    .det_valid, .det_flow, .watched
  );

  // ---------------- events ----------------
  always_comb begin
    ev             = '0;
    ev.minor_tick  = minor_tick;
    ev.major_tick  = major_tick;
    ev.reset_tick  = reset_tick;
    ev.bl_drop     = in_valid && in_ready && bl_hit;
    ev.bypass      = bypass;
    ev.saturated   = saturated;
    ev.upd_overrun = upd_overrun;
    ev.sampled     = s_valid && s_ready;
    ev.ins_new     = ins_new;
    ev.ins_dup     = ins_dup;
    ev.ins_miss    = ins_miss;
    ev.est_start   = est_start;
    ev.est_done    = est_done;
    ev.est_overrun = est_overrun;
    ev.detect      = det_valid;
  end
endmodule
