// loft_flow_table: flow table and active-flow list of LOFT.
//
// One open-addressing hash table of 2**TAB_W slots holds, per flow, the flow
// ID, the accumulated volume sum A, the accumulated cardinality sum C and the
// number |J| of major cycles in which the flow was active. Two activity bits
// per slot form the active-flow lists of two major cycles (indexed by the
// parity of the global major-cycle number): the sampler marks flows active in
// the running cycle while the estimate engine reads, and then clears, the
// list of the cycle that has just ended. The paper keeps the active-flow list
// and the flow table in two Cuckoo hash tables in DRAM; this design merges them
// into one table with linear probing (at most MAX_PROBE slots), which is
// simpler in hardware. A flow that finds no slot within MAX_PROBE probes is
// not listed (ins_miss), like a sample the paper's sampler misses.
//
// Insert port (from the sampler, valid/ready): a flow ID and the parity of the
// running major cycle. The probe walks one slot per clock starting at
// fmix32(flow ID) and ends on the flow's slot (ins_dup, activity bit set) or
// on a free slot (ins_new, slot initialised with A=C=|J|=0). ins_ready is low
// while a probe is in progress or while ins_pause is high.
//
// Estimate port: rd_en/rd_slot return the slot one clock later on rd_*.
// wr_en writes A, C, |J| of a slot and, with wr_clr, clears its activity
// bit of parity wr_clr_par.
// clr_en zeroes A, C, |J| of a slot and frees it unless it is active in
// parity clr_keep_par (used at a reset cycle). The estimate port only writes
// occupied slots and the insert port only initialises free ones, so the two
// never write the same slot in one clock (the estimate pauses inserts while it
// frees slots).
//
// Lint: the upper bits of the probe hash ins_h are unused on purpose (the low
// TAB_W bits give the first slot).
module loft_flow_table
  import loft_pkg::*;
#(
  parameter int unsigned TAB_W     = 18,
  parameter int unsigned MAX_PROBE = 16,
  parameter int unsigned A_W       = 64,
  parameter int unsigned C_W       = 48,
  parameter int unsigned NJ_W      = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  // insert port
  input  logic              ins_valid,
  input  logic [FLOW_W-1:0] ins_flow,
  input  logic              ins_par,
  input  logic              ins_pause,
  output logic              ins_ready,
  output logic              ins_new,
  output logic              ins_dup,
  output logic              ins_miss,
  // estimate port
  input  logic              rd_en,
  input  logic [TAB_W-1:0]  rd_slot,
  output logic              rd_valid,
  output logic [FLOW_W-1:0] rd_id,
  output logic [1:0]        rd_act,
  output logic [A_W-1:0]    rd_a,
  output logic [C_W-1:0]    rd_c,
  output logic [NJ_W-1:0]   rd_nj,
  input  logic              wr_en,
  input  logic [TAB_W-1:0]  wr_slot,
  input  logic [A_W-1:0]    wr_a,
  input  logic [C_W-1:0]    wr_c,
  input  logic [NJ_W-1:0]   wr_nj,
  input  logic              wr_clr,
  input  logic              wr_clr_par,
  input  logic              clr_en,
  input  logic [TAB_W-1:0]  clr_slot,
  input  logic              clr_keep_par
);
  localparam int unsigned T  = 1 << TAB_W;
  localparam int unsigned PW = $clog2(MAX_PROBE + 1);

  logic [FLOW_W-1:0] id   [T];
  logic [A_W-1:0]    a    [T];
  logic [C_W-1:0]    c    [T];
  logic [NJ_W-1:0]   nj   [T];
  logic              vld  [T];
  logic              act0 [T];
  logic              act1 [T];

  typedef enum logic [1:0] {I_INIT, I_IDLE, I_PROBE} istate_t;
  istate_t          ist;
  logic [TAB_W-1:0] pslot;
  logic [PW-1:0]    pcnt;
  logic [FLOW_W-1:0] pflow;
  logic             ppar;
  logic             p_match, p_free;
  logic [31:0]      ins_h;

  assign ins_ready = (ist == I_IDLE) && !ins_pause;

  always_comb begin
    ins_h   = fmix32(ins_flow);
    p_match = vld[pslot] && (id[pslot] == pflow);
    p_free  = !vld[pslot];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ist      <= I_INIT;
      pslot    <= '0;
      pcnt     <= '0;
      pflow    <= '0;
      ppar     <= 1'b0;
      ins_new  <= 1'b0;
      ins_dup  <= 1'b0;
      ins_miss <= 1'b0;
      rd_valid <= 1'b0;
      rd_id    <= '0;
      rd_act   <= '0;
      rd_a     <= '0;
      rd_c     <= '0;
      rd_nj    <= '0;
    end else begin
      ins_new  <= 1'b0;
      ins_dup  <= 1'b0;
      ins_miss <= 1'b0;

      // ------------- estimate port -------------
      if (rd_en) begin
        rd_valid <= vld[rd_slot];
        rd_id    <= id[rd_slot];
        rd_act   <= {act1[rd_slot], act0[rd_slot]};
        rd_a     <= a[rd_slot];
        rd_c     <= c[rd_slot];
        rd_nj    <= nj[rd_slot];
      end
      if (wr_en) begin
        a[wr_slot]  <= wr_a;
        c[wr_slot]  <= wr_c;
        nj[wr_slot] <= wr_nj;
        if (wr_clr && wr_clr_par)  act1[wr_slot] <= 1'b0;
        if (wr_clr && !wr_clr_par) act0[wr_slot] <= 1'b0;
      end
      if (clr_en) begin
        a[clr_slot]  <= '0;
        c[clr_slot]  <= '0;
        nj[clr_slot] <= '0;
        if (!(clr_keep_par ? act1[clr_slot] : act0[clr_slot])) begin
          vld[clr_slot]  <= 1'b0;
          act0[clr_slot] <= 1'b0;
          act1[clr_slot] <= 1'b0;
        end
      end

      // ------------- insert port -------------
      case (ist)
        I_INIT: begin            // free every slot after reset
          vld[pslot]  <= 1'b0;
          act0[pslot] <= 1'b0;
          act1[pslot] <= 1'b0;
          pslot       <= pslot + 1'b1;
          if (pslot == TAB_W'(T - 1)) ist <= I_IDLE;
        end
        I_IDLE: begin
          if (ins_valid && ins_ready) begin
            pflow <= ins_flow;
            ppar  <= ins_par;
            pslot <= ins_h[TAB_W-1:0];
            pcnt  <= '0;
            ist   <= I_PROBE;
          end
        end
        I_PROBE: begin
          if (p_match) begin
            if (ppar) act1[pslot] <= 1'b1;
            else      act0[pslot] <= 1'b1;
            ins_dup <= 1'b1;
            ist     <= I_IDLE;
          end else if (p_free) begin
            vld[pslot]  <= 1'b1;
            id[pslot]   <= pflow;
            a[pslot]    <= '0;
            c[pslot]    <= '0;
            nj[pslot]   <= '0;
            act0[pslot] <= !ppar;
            act1[pslot] <= ppar;
            ins_new     <= 1'b1;
            ist         <= I_IDLE;
          end else if (pcnt == PW'(MAX_PROBE - 1)) begin
            ins_miss <= 1'b1;
            ist      <= I_IDLE;
          end else begin
            pslot <= pslot + 1'b1;
            pcnt  <= pcnt + 1'b1;
          end
        end
        default: ist <= I_IDLE;
      endcase
    end
  end
endmodule
