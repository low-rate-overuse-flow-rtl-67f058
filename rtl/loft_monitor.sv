// loft_monitor: precise monitoring of the watchlist flows (leaky buckets).
//
// Holds N flows (64 in the paper) handed over by the estimate engine at the
// end of each major cycle; they are monitored during the following major
// cycle. Each entry is a leaky bucket that checks the flow specification
// gamma*t + beta: the bucket level drains by gamma bytes per clock and grows
// by the packet size; a packet that lifts the level above beta is a violation.
// A violating flow is reported once on det_valid/det_flow (one clock, the
// clock after its packet) and its entry is released. Because the bucket only
// ever reports a flow that really exceeded gamma*t + beta, monitoring yields
// no false positives.
//
// gamma and beta come with every packet from the classifier (gamma in bytes per
// clock, RATE_FRAC fractional bits; beta in bytes). The level is kept with the
// same fractional bits. A packet is looked up against all entries in the clock
// it arrives and the matching bucket is updated in that clock, so one packet
// per clock is accepted. load replaces the whole list and empties all buckets;
// a packet arriving in the load clock is not monitored.
// The paper names the leaky-bucket algorithm and the 64 monitors; the fixed-
// point formats and the bucket reset at load are this design's choices.
//
// Lint: the unused upper bits of the match index hi are the width of the
// loop variable; only $clog2(N) bits are meaningful.
module loft_monitor
  import loft_pkg::*;
#(
  parameter int unsigned N     = 64,
  parameter int unsigned LVL_W = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TIME_W-1:0]  now,
  // new watchlist
  input  logic               load,
  input  logic [FLOW_W-1:0]  load_id [N],
  input  logic [N-1:0]       load_vld,
  // packets
  input  logic               pkt_valid,
  input  pkt_t               pkt,
  // detected overuse flow
  output logic               det_valid,
  output logic [FLOW_W-1:0]  det_flow,
  output logic [N-1:0]       watched
);
  logic [FLOW_W-1:0] id    [N];
  logic [LVL_W-1:0]  level [N];
  logic [TIME_W-1:0] last  [N];

  logic              hit;
  int unsigned       hi;
  logic [TIME_W-1:0] dt;
  logic [RATE_W+TIME_W-1:0] leak;
  logic [LVL_W-1:0]  drained;
  logic [LVL_W:0]    lvl_new;
  logic [LVL_W:0]    limit;
  logic              viol;

  always_comb begin
    hit = 1'b0;
    hi  = 0;
    for (int i = N - 1; i >= 0; i--)
      if (watched[i] && id[i] == pkt.flow_id) begin
        hit = 1'b1;
        hi  = i;
      end
    dt      = now - last[hi];
    leak    = (RATE_W+TIME_W)'(pkt.gamma) * (RATE_W+TIME_W)'(dt);
    drained = ((RATE_W+TIME_W)'(level[hi]) > leak) ? LVL_W'((RATE_W+TIME_W)'(level[hi]) - leak) : '0;
    lvl_new = {1'b0, drained} + ((LVL_W+1)'(pkt.size) << RATE_FRAC);
    limit   = (LVL_W+1)'(pkt.beta) << RATE_FRAC;
    viol    = lvl_new > limit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      watched   <= '0;
      det_valid <= 1'b0;
      det_flow  <= '0;
    end else begin
      det_valid <= 1'b0;
      if (load) begin
        watched <= load_vld;
        for (int i = 0; i < N; i++) begin
          id[i]    <= load_id[i];
          level[i] <= '0;
          last[i]  <= now;
        end
      end else if (pkt_valid && hit) begin
        last[hi] <= now;
        if (viol) begin
          watched[hi] <= 1'b0;
          det_valid   <= 1'b1;
          det_flow    <= pkt.flow_id;
        end else begin
          level[hi] <= lvl_new[LVL_W-1:0];
        end
      end
    end
  end
endmodule
