// loft_pkg: widths, defaults and shared helpers of the LOFT overuse-flow detector.
//
// The detector follows the Low-Rate Overuse Flow Tracer algorithm: a fast-path
// counter array indexed by a hash that changes every minor cycle, a randomised
// packet sampler that builds the list of active flows, and a once-per-major-cycle
// estimate engine that ranks flows by (|J|/j) * (A/C). Default numbers are the
// paper's main configuration: 16384 counters, 64 minor cycles per second, 4 major
// cycles per second, 2.1e6 samples per second, 64 precisely monitored flows and a
// 200 MHz clock. Widths of flow IDs and counters (4 bytes each) follow the paper's
// per-flow memory example; the rest are this design's choices.
package loft_pkg;

  // 4-byte flow IDs and 4-byte counters, as in the paper's memory example.
  localparam int unsigned FLOW_W  = 32;
  localparam int unsigned SIZE_W  = 16;   // packet length in bytes (design choice)
  localparam int unsigned CTR_W   = 32;
  localparam int unsigned TIME_W  = 48;   // free-running clock-cycle time stamp

  // Leaky-bucket rate: bytes per clock cycle, unsigned fixed point with
  // RATE_FRAC fractional bits (design choice).
  localparam int unsigned RATE_W    = 32;
  localparam int unsigned RATE_FRAC = 24;
  localparam int unsigned BURST_W   = 32;

  // Packet as it leaves the classifier: flow ID, length and the flow's
  // specification gamma*t + beta.
  typedef struct packed {
    logic [FLOW_W-1:0]  flow_id;
    logic [SIZE_W-1:0]  size;
    logic [RATE_W-1:0]  gamma;
    logic [BURST_W-1:0] beta;
  } pkt_t;

  // One-clock event flags of the whole detector, for statistics and tests.
  typedef struct packed {
    logic minor_tick;    // a minor cycle began
    logic major_tick;    // a major cycle began
    logic reset_tick;    // a reset cycle ended
    logic bl_drop;       // packet dropped by the blacklist
    logic bypass;        // update pipeline forwarded a counter value
    logic saturated;     // a fast-memory counter saturated
    logic upd_overrun;   // minor cycle shorter than the counter drain
    logic sampled;       // sampler handed a flow ID to the flow table
    logic ins_new;       // flow table: new flow inserted
    logic ins_dup;       // flow table: flow already listed, marked active
    logic ins_miss;      // flow table: no free slot within the probe limit
    logic est_start;     // estimate engine started
    logic est_done;      // estimate engine finished, new watchlist
    logic est_overrun;   // estimate still busy when the next one was due
    logic detect;        // precise monitoring found an overuse flow
  } loft_events_t;

  // Seed of H_{j,k}: global major-cycle number and minor index within it.
  function automatic logic [31:0] make_seed(input logic [15:0] jg, input logic [15:0] k);
    return {jg, k};
  endfunction

  // MurmurHash3 32-bit finaliser (fmix32).
  function automatic logic [31:0] fmix32(input logic [31:0] v);
    logic [31:0] h;
    h = v;
    h = h ^ (h >> 16);
    h = h * 32'h85EB_CA6B;
    h = h ^ (h >> 13);
    h = h * 32'hC2B2_AE35;
    h = h ^ (h >> 16);
    return h;
  endfunction

endpackage
