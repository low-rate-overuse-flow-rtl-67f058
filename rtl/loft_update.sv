// loft_update: the fast-path update algorithm of LOFT (one packet per clock).
//
// For every packet the counter x = H_{j,k}(flow ID) of the current counter
// array is increased by the packet size: one read and one write of fast memory
// per packet, as in the paper. Two counter arrays of W = 2**IDX_W entries
// (ping-pong banks) are kept: at each minor-cycle boundary (minor_tick) the
// banks swap, new packets go to the fresh bank, and the finished bank is moved
// out to main memory as a stream (drain_*) while its entries are cleared to 0,
// so that an empty array is ready for the minor cycle after next.
//
// Pipeline (the counter memory has a registered read, like an SRAM):
//   stage 0  hash the flow ID, pick the bank
//   stage 1  read the counter
//   stage 2  add the size (saturating at 2**CTR_W-1) and write back
// A packet in stage 1 reading the counter that stage 2 writes in the same clock
// takes the new value from stage 2 (bypass), so back-to-back packets of the
// same flow are counted exactly.
//
// Drain: three clocks after the swap (pipeline flushed) the old bank is read
// out one entry per clock, index 0 first; drain_k / drain_jg name the minor
// cycle the array belongs to and drain_last marks its last entry. A minor cycle
// must last at least W + 4 clocks; otherwise overrun is raised.
// After rst_n both banks are cleared (W clocks, in_ready low).
//
// Follows the paper: single counter array per minor cycle, hash changes per
// minor cycle, array moved to main memory at the end of the minor cycle.
// Design choices: ping-pong banks, 3-stage pipeline with bypass, saturation,
// streaming drain, clearing after reset.
module loft_update
  import loft_pkg::*;
#(
  parameter int unsigned IDX_W = 14,      // W = 16384 counters
  parameter int unsigned CW    = CTR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // packet input
  input  logic              in_valid,
  input  logic [FLOW_W-1:0] in_flow,
  input  logic [SIZE_W-1:0] in_size,
  output logic              in_ready,
  // cycle information from loft_cycle_timer
  input  logic              minor_tick,
  input  logic [15:0]       k,
  input  logic [15:0]       jg,
  // finished counter array towards main memory
  output logic              drain_valid,
  output logic [IDX_W-1:0]  drain_idx,
  output logic [CW-1:0]     drain_data,
  output logic [15:0]       drain_k,
  output logic [15:0]       drain_jg,
  output logic              drain_last,
  // events
  output logic              bypass,
  output logic              saturated,
  output logic              overrun
);
  localparam int unsigned W = 1 << IDX_W;

  logic [CW-1:0]    rd_pkt [2];       // registered read, packet port
  logic [CW-1:0]    rd_drn [2];       // registered read, drain port

  logic             act;             // bank receiving packets
  logic             bank_in;
  logic [IDX_W-1:0] idx_in;

  // stage registers
  logic             s1_v, s2_v;
  logic             s1_b, s2_b;
  logic [IDX_W-1:0] s1_idx, s2_idx;
  logic [SIZE_W-1:0] s1_sz, s2_sz;
  logic [CW-1:0]    s2_rd;
  logic             s2_hit;
  logic [CW-1:0]    s2_fwd;
  logic [CW:0]      s2_sum;
  logic [CW-1:0]    s2_new;
  logic             s1_hit;

  // init / drain control
  typedef enum logic [1:0] {S_INIT, S_IDLE, S_WAIT, S_DRAIN} dstate_t;
  dstate_t          dstate;
  logic [IDX_W:0]   dcnt;
  logic [1:0]       wcnt;
  logic             dbank;
  logic [15:0]      dk, djg;
  logic             rd_v, rd_last;
  logic [IDX_W-1:0] rd_idx;

  // k of the minor cycle that has just ended: the value k had one clock
  // before minor_tick.
  logic [15:0] k_prev;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) k_prev <= '0;
    else        k_prev <= k;
  end

  assign bank_in  = act ^ minor_tick;
  assign in_ready = (dstate != S_INIT);

  loft_hash #(.IDX_W(IDX_W)) u_hash (
    .seed    (make_seed(jg, k)),
    .flow_id (in_flow),
    .idx     (idx_in)
  );

  always_comb begin
    s2_rd     = s2_hit ? s2_fwd : rd_pkt[s2_b];
    s2_sum    = {1'b0, s2_rd} + (CW+1)'(s2_sz);
    s2_new    = s2_sum[CW] ? '1 : s2_sum[CW-1:0];
    s1_hit    = s1_v && s2_v && (s1_b == s2_b) && (s1_idx == s2_idx);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act       <= 1'b0;
      s1_v      <= 1'b0;
      s2_v      <= 1'b0;
      s1_b      <= 1'b0;
      s2_b      <= 1'b0;
      s1_idx    <= '0;
      s2_idx    <= '0;
      s1_sz     <= '0;
      s2_sz     <= '0;
      s2_hit    <= 1'b0;
      s2_fwd    <= '0;
      dstate    <= S_INIT;
      dcnt      <= '0;
      wcnt      <= '0;
      dbank     <= 1'b0;
      dk        <= '0;
      djg       <= '0;
      rd_v      <= 1'b0;
      rd_last   <= 1'b0;
      rd_idx    <= '0;
      bypass    <= 1'b0;
      saturated <= 1'b0;
      overrun   <= 1'b0;
    end else begin
      bypass    <= 1'b0;
      saturated <= 1'b0;
      overrun   <= 1'b0;
      rd_v      <= 1'b0;
      rd_last   <= 1'b0;

      // ---------------- packet pipeline ----------------
      if (minor_tick) act <= ~act;
      s1_v   <= in_valid && in_ready;
      s1_b   <= bank_in;
      s1_idx <= idx_in;
      s1_sz  <= in_size;

      s2_v   <= s1_v;
      s2_b   <= s1_b;
      s2_idx <= s1_idx;
      s2_sz  <= s1_sz;
      s2_hit <= s1_hit;
      s2_fwd <= s2_new;
      bypass <= s1_hit;
      if (s2_v) saturated <= s2_sum[CW];

      // ---------------- init and drain ----------------
      case (dstate)
        S_INIT: begin
          dcnt <= dcnt + 1'b1;
          if (dcnt == (IDX_W+1)'(W - 1)) begin
            dcnt   <= '0;
            dstate <= S_IDLE;
          end
        end
        S_IDLE: begin
          if (minor_tick) begin
            dbank  <= act;           // bank that has just been closed
            dk     <= k_prev;
            djg    <= (k == 16'd0) ? jg - 1'b1 : jg;
            wcnt   <= '0;
            dstate <= S_WAIT;
          end
        end
        S_WAIT: begin
          wcnt <= wcnt + 1'b1;
          if (wcnt == 2'd2) dstate <= S_DRAIN;
        end
        S_DRAIN: begin
          rd_v    <= 1'b1;
          rd_idx  <= dcnt[IDX_W-1:0];
          rd_last <= (dcnt == (IDX_W+1)'(W - 1));
          dcnt <= dcnt + 1'b1;
          if (dcnt == (IDX_W+1)'(W - 1)) begin
            dcnt   <= '0;
            dstate <= S_IDLE;
          end
        end
        default: dstate <= S_IDLE;
      endcase
      if (minor_tick && dstate != S_IDLE && dstate != S_INIT) overrun <= 1'b1;
    end
  end


  // Counter banks. Each bank has one write port, shared by the packet path
  // (active bank) and the clearing sweep (init, or the bank being drained);
  // the two never meet in one bank because the drain starts only after the
  // pipeline has flushed. Two registered read ports: packet and drain.
  for (genvar b = 0; b < 2; b++) begin : g_bank
    logic [CW-1:0]    m [W];
    logic             clr, we;
    logic [IDX_W-1:0] wa;
    logic [CW-1:0]    wd;
    always_comb begin
      clr = (dstate == S_INIT) || (dstate == S_DRAIN && dbank == 1'(b));
      we  = clr || (s2_v && s2_b == 1'(b));
      wa  = clr ? dcnt[IDX_W-1:0] : s2_idx;
      wd  = clr ? '0 : s2_new;
    end
    always_ff @(posedge clk) begin
      if (we) m[wa] <= wd;
      rd_pkt[b] <= m[s1_idx];
      rd_drn[b] <= m[dcnt[IDX_W-1:0]];
    end
  end

  assign drain_data  = rd_drn[dbank];
  assign drain_valid = rd_v;
  assign drain_idx   = rd_idx;
  assign drain_last  = rd_last;
  assign drain_k     = dk;
  assign drain_jg    = djg;

endmodule
